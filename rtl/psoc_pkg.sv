// psoc_pkg -- shared types of the pattern generator.
//
// An instruction is one 128-bit word of the instruction RAM. From the most
// significant bit down it holds 8 reserved bits (127..120), the 64 output
// flags (119..56), a 4-bit opcode (55..52), a 20-bit data argument (51..32)
// and a 32-bit delay (31..0) counted in state-machine clock cycles. The field
// layout and the opcode numbers are those of the published instruction format,
// a 128-bit extension of the PulseBlaster's 80-bit word.
package psoc_pkg;

  localparam int unsigned INSTR_W = 128;
  localparam int unsigned FLAG_W  = 64;
  localparam int unsigned OPC_W   = 4;
  localparam int unsigned DATA_W  = 20;
  localparam int unsigned DELAY_W = 32;
  localparam int unsigned RSVD_W  = 8;

  typedef enum logic [OPC_W-1:0] {
    OP_CONTINUE   = 4'd0,  // next instruction
    OP_STOP       = 4'd1,  // halt, outputs held
    OP_LOOP       = 4'd2,  // first instruction of a loop body, data = passes
    OP_END_LOOP   = 4'd3,  // last instruction of a loop body, data = loop start
    OP_JSR        = 4'd4,  // jump to subroutine at data
    OP_RTS        = 4'd5,  // return to the instruction after the JSR
    OP_BRANCH     = 4'd6,  // jump to data
    OP_LONG_DELAY = 4'd7,  // hold for delay * data cycles
    OP_WAIT       = 4'd8   // wait for a hardware trigger
  } opcode_e;

  typedef struct packed {
    logic [RSVD_W-1:0]  reserved;  // 127..120
    logic [FLAG_W-1:0]  flags;     // 119..56
    opcode_e            opcode;    //  55..52
    logic [DATA_W-1:0]  data;      //  51..32
    logic [DELAY_W-1:0] delay;     //  31..0
  } instr_t;

  // Build an instruction word (used by testbenches and host-side models).
  function automatic instr_t make_instr(logic [FLAG_W-1:0] flags, opcode_e op,
                                        logic [DATA_W-1:0] data, logic [DELAY_W-1:0] delay);
    instr_t i;
    i.reserved = '0;
    i.flags    = flags;
    i.opcode   = op;
    i.data     = data;
    i.delay    = delay;
    return i;
  endfunction

endpackage
