// pulse_sync -- carries one-cycle pulses from one clock domain to another.
//
// Each src_pulse flips a toggle register in the source domain; the toggle is
// synchronised with two flops in the destination domain and every change of
// it gives one dst_pulse cycle. Pulses must be further apart than about three
// destination clock cycles plus one source cycle. Latency: two to three
// destination cycles.
module pulse_sync (
  input  logic src_clk,
  input  logic src_rst_n,
  input  logic src_pulse,
  input  logic dst_clk,
  input  logic dst_rst_n,
  output logic dst_pulse
);

  logic tog_src;
  logic tog_dst;
  logic tog_dst_d;

  always_ff @(posedge src_clk or negedge src_rst_n) begin
    if (!src_rst_n)     tog_src <= 1'b0;
    else if (src_pulse) tog_src <= ~tog_src;
  end

  sync_2ff u_sync (.clk(dst_clk), .rst_n(dst_rst_n), .d(tog_src), .q(tog_dst));

  always_ff @(posedge dst_clk or negedge dst_rst_n) begin
    if (!dst_rst_n) tog_dst_d <= 1'b0;
    else            tog_dst_d <= tog_dst;
  end

  assign dst_pulse = tog_dst ^ tog_dst_d;

endmodule
