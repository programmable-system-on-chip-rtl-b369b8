// tb_trigger_in -- self-checking testbench of the trigger input block.
//
// Drives random pulses on all four inputs and checks that exactly one
// one-cycle trig_pulse comes out per rising edge of the selected input, 3
// clock edges after the input rises, and none for the other inputs.
module tb_trigger_in;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0] trig_in = '0;
  logic [1:0] sel = '0;
  logic trig_pulse;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  trigger_in #(.N_IN(4)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int s = 0; s < 4; s++) begin
      sel = 2'(s);
      repeat (6) @(posedge clk);
      for (int k = 0; k < 20; k++) begin
        automatic int lat = -1;
        automatic int pulses = 0;
        automatic int ch = $urandom_range(0, 3);
        automatic int width = $urandom_range(1, 6);
        #1 trig_in[ch] = 1'b1;
        for (int c = 1; c <= 12; c++) begin
          @(posedge clk);
          if (c == width) #1 trig_in[ch] = 1'b0;
          #2;
          if (trig_pulse) begin pulses++; if (lat < 0) lat = c; end
        end
        if (ch == s) begin
          check(pulses == 1, $sformatf("sel %0d: %0d pulses for one edge", s, pulses));
          check(lat == 3, $sformatf("sel %0d: pulse %0d edges after input", s, lat));
        end else begin
          check(pulses == 0, $sformatf("sel %0d: pulse from input %0d", s, ch));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
