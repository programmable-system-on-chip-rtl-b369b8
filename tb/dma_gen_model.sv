// dma_gen_model -- behavioural DMA channel whose SDRAM content is computed.
//
// Not synthesizable logic: like dma_sdram_model, but word k of the SDRAM is
// long_prog_pkg::gen_word(k, N_WORDS) instead of an array entry, so programs
// of millions of instructions need no storage. Command: byte address and
// byte length (valid/ready); after LAT cycles the words stream out on
// s_valid/s_ready/s_data with random one-cycle gaps.
module dma_gen_model
  import long_prog_pkg::*;
#(
  parameter int unsigned N_WORDS = 8192000,
  parameter int unsigned LAT     = 20
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  logic [31:0]  cmd_addr,
  input  logic [31:0]  cmd_len,
  output logic         s_valid,
  input  logic         s_ready,
  output logic [127:0] s_data,
  output int           n_cmds
);

  int unsigned ptr, left, wait_cnt;
  logic busy, gap;

  assign cmd_ready = !busy;
  assign s_valid   = busy && wait_cnt == 0 && left != 0 && !gap;
  assign s_data    = (ptr < N_WORDS) ? gen_word(ptr, N_WORDS) : '0;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; ptr <= 0; left <= 0; wait_cnt <= 0; gap <= 1'b0; n_cmds <= 0;
    end else begin
      gap <= ($urandom_range(0, 7) == 0);
      if (!busy && cmd_valid) begin
        busy     <= 1'b1;
        ptr      <= cmd_addr / 16;
        left     <= cmd_len / 16;
        wait_cnt <= LAT;
        n_cmds   <= n_cmds + 1;
      end else if (busy) begin
        if (wait_cnt != 0) wait_cnt <= wait_cnt - 1;
        else if (s_valid && s_ready) begin
          ptr  <= ptr + 1;
          left <= left - 1;
          if (left == 1) busy <= 1'b0;
        end
      end
    end
  end

endmodule
