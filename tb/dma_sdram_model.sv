// dma_sdram_model -- behavioural model of the SDRAM and the DMA channel.
//
// Not synthesizable logic: it stands in for the processor-side DMA engine
// and the external SDRAM in simulation. mem holds N_WORDS words of W bits
// (the program, one instruction per word); the testbench fills it by
// hierarchical reference. A command (cmd_valid/cmd_ready, byte address and
// byte length) is accepted when the model is idle; after LAT cycles it
// streams cmd_len/(W/8) words starting at word cmd_addr/(W/8) on
// s_valid/s_ready/s_data. With STALLS=1 it inserts random one-cycle gaps.
// Addresses beyond mem read as zero. n_cmds counts accepted commands.
module dma_sdram_model #(
  parameter int unsigned W       = 128,
  parameter int unsigned N_WORDS = 4096,
  parameter int unsigned LAT     = 4,
  parameter bit          STALLS  = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  logic [31:0]  cmd_addr,
  input  logic [31:0]  cmd_len,
  output logic         s_valid,
  input  logic         s_ready,
  output logic [W-1:0] s_data,
  output int           n_cmds
);

  logic [W-1:0] mem [N_WORDS];

  int unsigned ptr, left, wait_cnt;
  logic        busy;
  logic        gap;

  assign cmd_ready = !busy;
  assign s_valid   = busy && wait_cnt == 0 && left != 0 && !gap;
  assign s_data    = (ptr < N_WORDS) ? mem[ptr] : '0;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      ptr      <= 0;
      left     <= 0;
      wait_cnt <= 0;
      gap      <= 1'b0;
      n_cmds   <= 0;
    end else begin
      gap <= STALLS && ($urandom_range(0, 7) == 0);
      if (!busy && cmd_valid) begin
        busy     <= 1'b1;
        ptr      <= cmd_addr / (W / 8);
        left     <= cmd_len / (W / 8);
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
