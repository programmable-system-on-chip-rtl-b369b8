// pingpong_ctrl -- ping-pong memory controller.
//
// Lets the state machine run programs far longer than the instruction RAM by
// using the RAM as a two-bank cache of a program held in SDRAM. The
// controller first copies the first 2^(AW-1) instructions (one "chunk") into
// Bank 0 and sets its last_bank register to 1. It then keeps comparing the
// bank the state machine is reading (the top bit of its address) with
// last_bank. Whenever they differ, the state machine has moved to the other
// bank, so the bank it left is refilled with the next chunk and last_bank is
// set to the bank now in use. Because last_bank starts at 1, Bank 1 is filled
// right after Bank 0 as soon as the state machine reads Bank 0.
//
//   IDLE --start--> CMD(bank 0) -> XFER -> last_bank = 1 -> CHECK
//   CHECK: sm_bank == last_bank -> CHECK
//          sm_bank != last_bank -> CMD(bank last_bank) -> XFER
//                                  -> last_bank = ~loaded bank -> CHECK
//   after num_chunks chunks -> DONE;  abort -> IDLE from any state
//
// Interface and timing (all in the PS clock domain):
//  - DMA request: cmd_valid/cmd_ready with cmd_addr (SDRAM byte address,
//    base_addr + chunk * chunk bytes) and cmd_len (bytes of one chunk).
//  - DMA data: s_valid/s_ready/s_data, one 128-bit instruction per beat; the
//    controller accepts a beat every cycle and writes it to the RAM in the
//    same cycle (ram_we, ram_waddr = {bank, word index}).
//  - sm_bank_async comes from the state-machine clock domain and is
//    synchronised here with two flops.
// The bank flow follows the paper's ping-pong algorithm; the command/stream
// handshake to the DMA, the fixed whole-bank transfer size and stopping after
// num_chunks chunks are this design's choices.
module pingpong_ctrl #(
  parameter int unsigned AW = 15,
  parameter int unsigned W  = 128
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          abort,
  input  logic [31:0]   base_addr,
  input  logic [31:0]   num_chunks,
  input  logic          sm_bank_async,
  output logic          cmd_valid,
  input  logic          cmd_ready,
  output logic [31:0]   cmd_addr,
  output logic [31:0]   cmd_len,
  input  logic          s_valid,
  output logic          s_ready,
  input  logic [W-1:0]  s_data,
  output logic          ram_we,
  output logic [AW-1:0] ram_waddr,
  output logic [W-1:0]  ram_wdata,
  output logic          last_bank,
  output logic [31:0]   chunks_loaded,
  output logic          loading,
  output logic          done
);

  localparam int unsigned BANK_WORDS = 2 ** (AW - 1);
  localparam int unsigned WORD_BYTES = W / 8;
  localparam logic [31:0] CHUNK_BYTES = 32'(BANK_WORDS * WORD_BYTES);

  typedef enum logic [2:0] {P_IDLE, P_CMD, P_XFER, P_CHECK, P_DONE} pstate_e;

  pstate_e          state;
  logic             tgt_bank;
  logic [AW-2:0]    word;
  logic             sm_bank;
  logic             beat;
  logic             last_beat;

  sync_2ff u_bank_sync (.clk(clk), .rst_n(rst_n), .d(sm_bank_async), .q(sm_bank));

  assign cmd_valid = (state == P_CMD);
  assign cmd_addr  = base_addr + chunks_loaded * CHUNK_BYTES;
  assign cmd_len   = CHUNK_BYTES;
  assign s_ready   = (state == P_XFER);
  assign beat      = s_valid && s_ready;
  assign last_beat = beat && (word == {(AW-1){1'b1}});
  assign ram_we    = beat;
  assign ram_waddr = {tgt_bank, word};
  assign ram_wdata = s_data;
  assign loading   = (state == P_CMD) || (state == P_XFER);
  assign done      = (state == P_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= P_IDLE;
      tgt_bank      <= 1'b0;
      word          <= '0;
      last_bank     <= 1'b0;
      chunks_loaded <= '0;
    end else if (abort) begin
      state <= P_IDLE;
    end else begin
      unique case (state)
        P_IDLE: if (start) begin
          chunks_loaded <= '0;
          if (num_chunks != '0) begin
            tgt_bank <= 1'b0;                    // load bank 0
            state    <= P_CMD;
          end else begin
            state    <= P_DONE;
          end
        end
        P_CMD: if (cmd_ready) begin
          word  <= '0;
          state <= P_XFER;
        end
        P_XFER: if (beat) begin
          word <= word + 1'b1;
          if (last_beat) begin
            last_bank     <= ~tgt_bank;          // set last_bank = 1 / = 0
            chunks_loaded <= chunks_loaded + 32'd1;
            state         <= (chunks_loaded + 32'd1 >= num_chunks) ? P_DONE : P_CHECK;
          end
        end
        P_CHECK: if (sm_bank != last_bank) begin // not in last_bank
          tgt_bank <= last_bank;                 // refill the bank it left
          state    <= P_CMD;
        end
        P_DONE: if (start) begin
          chunks_loaded <= '0;
          tgt_bank      <= 1'b0;
          state         <= (num_chunks != '0) ? P_CMD : P_DONE;
        end
        default: state <= P_IDLE;
      endcase
    end
  end

  // DMA request must be held until accepted.
  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n || abort)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_addr));
  // Data are only written while a transfer is in progress.
  a_we_in_xfer: assert property (@(posedge clk) disable iff (!rst_n)
    ram_we |-> state == P_XFER);

endmodule
