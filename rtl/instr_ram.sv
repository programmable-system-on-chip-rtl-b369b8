// instr_ram -- dual-clock instruction memory (default 32768 x 128 bits).
//
// The memory is the cache the state machine executes from. Its address space
// is split by the top address bit into Bank 0 and Bank 1 of 2^(AW-1) words
// each; the ping-pong controller rewrites one bank while the state machine
// reads the other. Port A is a write port in the PS clock domain (wclk), port
// B a read port in the state-machine clock domain (rclk), so the two sides
// need no common clock.
//
// Timing: a write with we=1 lands at the rising edge of wclk. A read with
// re=1 puts mem[raddr] on rdata after the next rising edge of rclk; while
// re=0 rdata holds its value, so the reader can keep an instruction on the
// output register for as long as it executes. Size and dual-clock use follow
// the paper; the write-only/read-only split of the ports and the registered,
// enabled read are this design's choices (block-RAM style).
module instr_ram #(
  parameter int unsigned AW = 15,
  parameter int unsigned W  = 128
) (
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          rclk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [2**AW];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
