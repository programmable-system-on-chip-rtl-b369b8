// pattern_sm -- the instruction-executing state machine of the pattern generator.
//
// The machine reads 128-bit instructions (psoc_pkg::instr_t) from the
// instruction RAM row by row and drives the 64 flag bits of each one on the
// TTL outputs for `delay` clock cycles; the opcode then decides which address
// is read next (PulseBlaster-style instruction set: CONTINUE, STOP, LOOP,
// END LOOP, JSR, RTS, BRANCH, LONG DELAY, WAIT).
//
// How it works: the instruction being executed is the RAM's output register
// itself. The machine leaves the RAM read enable low while the instruction
// runs, and in its last cycle computes the next address from the opcode, the
// loop counter, the return register and the trigger (a Mealy decision) and
// reads it, so the next instruction is on rd_data in the following cycle.
// Every instruction therefore lasts exactly its delay, with no fetch gaps.
//   CONTINUE    delay cycles, then pc+1
//   STOP        flags stay on the outputs; machine halts until start
//   LOOP        first instruction of the body; on first entry loads the loop
//               counter with data (>=1), then pc+1
//   END LOOP    last instruction of the body; while passes remain jumps to
//               data, else leaves the loop with pc+1 (one loop level only)
//   JSR / RTS   jump to data saving pc+1 / return to the saved address
//               (one return register)
//   BRANCH      jump to data
//   LONG DELAY  delay * data cycles
//   WAIT        flags out at once, then wait for a trigger pulse; the delay is
//               counted from the trigger cycle, then pc+1
// Addresses are AW bits wide; pc wraps from the last word to 0, so execution
// moves from bank 1 back to bank 0 after the ping-pong controller refilled it.
//
// Interface and timing: start (one-cycle pulse) reads address 0; the first
// instruction appears on rd_data one cycle later and its flags on ttl_out one
// cycle after that (the outputs are registered; all instructions see the same
// one-cycle offset). abort returns to idle, keeping the outputs. trig is a
// synchronous one-cycle pulse. delay = 0 executes as 1 cycle. The eight
// reserved bits of the instruction word are ignored.
//
// The instruction set, field layout and row-by-row reading follow the paper;
// the exact cycle timing, the semantics of a zero delay/count, the single
// return register and the trigger-then-delay order of WAIT are this design's
// choices.
module pattern_sm
  import psoc_pkg::*;
#(
  parameter int unsigned AW = 15
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              abort,
  input  logic              trig,
  output logic              rd_en,
  output logic [AW-1:0]     rd_addr,
  input  instr_t            rd_data,
  output logic [FLAG_W-1:0] ttl_out,
  output logic [AW-1:0]     pc,
  output logic              running,
  output logic              waiting,
  output logic              stopped
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WAIT_TRIG, S_STOPPED} state_e;

  state_e              state;
  logic                fresh;      // first cycle of the instruction on rd_data
  logic [DELAY_W-1:0]  cnt;        // cycles left in the current delay period
  logic [DATA_W-1:0]   rep;        // delay periods left (LONG DELAY)
  logic                loop_active;
  logic [DATA_W-1:0]   loop_cnt;   // passes left, including the current one
  logic [AW-1:0]       ret_addr;

  instr_t              cur;
  logic [DELAY_W-1:0]  delay_eff;
  logic [DATA_W-1:0]   rep_eff;
  logic                first;      // counting starts in this cycle
  logic [DELAY_W-1:0]  c_now;
  logic [DATA_W-1:0]   r_now;
  logic                last;       // last cycle of the instruction
  logic                advance;    // read the next instruction this cycle
  logic                hold_wait;  // WAIT instruction still waiting
  logic [AW-1:0]       pc_inc;
  logic [AW-1:0]       target;
  logic [AW-1:0]       next_addr;

  assign cur       = rd_data;
  assign delay_eff = (cur.delay == '0) ? DELAY_W'(1) : cur.delay;
  assign rep_eff   = (cur.opcode == OP_LONG_DELAY && cur.data > DATA_W'(1)) ? cur.data : DATA_W'(1);
  assign pc_inc    = pc + AW'(1);
  assign target    = cur.data[AW-1:0];

  // WAIT: no counting until the trigger arrives.
  assign hold_wait = ((state == S_RUN && fresh) || state == S_WAIT_TRIG) &&
                     cur.opcode == OP_WAIT && !trig;
  assign first     = (state == S_RUN && fresh) || state == S_WAIT_TRIG;
  assign c_now     = first ? delay_eff : cnt;
  assign r_now     = first ? rep_eff : rep;
  assign last      = (c_now == DELAY_W'(1)) && (r_now == DATA_W'(1));
  assign advance   = (state == S_RUN || state == S_WAIT_TRIG) && !abort && !hold_wait &&
                     last && cur.opcode != OP_STOP;

  always_comb begin
    next_addr = pc_inc;
    unique case (cur.opcode)
      OP_END_LOOP: if (loop_active && loop_cnt > DATA_W'(1)) next_addr = target;
      OP_JSR,
      OP_BRANCH:   next_addr = target;
      OP_RTS:      next_addr = ret_addr;
      default:     next_addr = pc_inc;
    endcase
  end

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = next_addr;
    if (state == S_IDLE || state == S_STOPPED) begin
      rd_en   = start;
      rd_addr = '0;
    end else if (advance) begin
      rd_en   = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      fresh       <= 1'b0;
      cnt         <= '0;
      rep         <= '0;
      loop_active <= 1'b0;
      loop_cnt    <= '0;
      ret_addr    <= '0;
      pc          <= '0;
      ttl_out     <= '0;
    end else begin
      if (state == S_RUN && fresh) ttl_out <= cur.flags;
      unique case (state)
        S_IDLE, S_STOPPED: begin
          if (start) begin
            state       <= S_RUN;
            fresh       <= 1'b1;
            pc          <= '0;
            loop_active <= 1'b0;
          end
        end
        S_RUN, S_WAIT_TRIG: begin
          if (abort) begin
            state <= S_IDLE;
            fresh <= 1'b0;
          end else if (hold_wait) begin
            state <= S_WAIT_TRIG;
            fresh <= 1'b0;
          end else if (!last) begin
            state <= S_RUN;
            fresh <= 1'b0;
            if (c_now == DELAY_W'(1)) begin
              cnt <= delay_eff;
              rep <= r_now - DATA_W'(1);
            end else begin
              cnt <= c_now - DELAY_W'(1);
              rep <= r_now;
            end
          end else if (cur.opcode == OP_STOP) begin
            state <= S_STOPPED;
            fresh <= 1'b0;
          end else begin
            state <= S_RUN;
            fresh <= 1'b1;
            pc    <= next_addr;
            unique case (cur.opcode)
              OP_LOOP: if (!loop_active) begin
                loop_active <= 1'b1;
                loop_cnt    <= (cur.data == '0) ? DATA_W'(1) : cur.data;
              end
              OP_END_LOOP: begin
                if (loop_active && loop_cnt > DATA_W'(1)) loop_cnt <= loop_cnt - DATA_W'(1);
                else                                       loop_active <= 1'b0;
              end
              OP_JSR:  ret_addr <= pc_inc;
              default: ;
            endcase
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign running = (state == S_RUN) || (state == S_WAIT_TRIG);
  assign waiting = (state == S_WAIT_TRIG);
  assign stopped = (state == S_STOPPED);

  // A STOP or WAIT never reads ahead; a read is only issued on the last cycle.
  a_read_only_at_end: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN && rd_en) |-> last);

endmodule
