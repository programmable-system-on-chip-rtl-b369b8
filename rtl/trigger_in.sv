// trigger_in -- digital side of the hardware trigger inputs.
//
// The carrier board turns each of its N_IN BNC inputs into a clean logic
// level with a comparator. This block synchronises all N_IN levels to the
// state-machine clock with two flops each, picks the one named by sel, and
// gives a one-cycle trig_pulse on each rising edge of it. A WAIT instruction
// continues on that pulse.
//
// Timing: trig_pulse is high in the third or fourth clk cycle after the input
// rises (two synchroniser flops plus the edge register). Changing sel can
// itself give one pulse if the new input is high and the old one low.
// The number of inputs follows the paper; edge triggering, the selector and
// the synchroniser are this design's choices.
module trigger_in #(
  parameter int unsigned N_IN = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_IN-1:0]         trig_in,
  input  logic [$clog2(N_IN)-1:0] sel,
  output logic                    trig_pulse
);

  logic [N_IN-1:0] lvl;
  logic            cur;
  logic            prev;

  for (genvar i = 0; i < N_IN; i++) begin : g_sync
    sync_2ff u_sync (.clk(clk), .rst_n(rst_n), .d(trig_in[i]), .q(lvl[i]));
  end

  assign cur = lvl[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev       <= 1'b0;
      trig_pulse <= 1'b0;
    end else begin
      prev       <= cur;
      trig_pulse <= cur && !prev;
    end
  end

endmodule
