// tb_instr_ram -- self-checking testbench of the dual-clock instruction RAM.
//
// Writes random words on a 10 ns write clock, reads them back on an
// unrelated 7 ns read clock, and checks the one-cycle registered read and
// that the output register holds while the read enable is low. Runs at a
// reduced depth (AW = 6) and then reads both banks at the top and bottom.
module tb_instr_ram;

  localparam int unsigned AW = 6;
  localparam int unsigned W  = 128;

  logic wclk = 1'b0, rclk = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0]  wdata = '0, rdata;
  logic [W-1:0]  model [2**AW];

  int checks = 0, failures = 0;

  always #5 wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  instr_ram #(.AW(AW), .W(W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [W-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    repeat (5000) @(posedge rclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill the whole memory from the write side
    for (int a = 0; a < 2**AW; a++) begin
      @(posedge wclk); #1;
      model[a] = rnd();
      we = 1'b1; waddr = AW'(a); wdata = model[a];
    end
    @(posedge wclk); #1 we = 1'b0;
    // a write with we low must not land
    waddr = AW'(5); wdata = ~model[5];
    @(posedge wclk); #1;
    // read side, random order
    for (int k = 0; k < 200; k++) begin
      automatic int a = $urandom_range(0, 2**AW - 1);
      @(posedge rclk); #1 re = 1'b1; raddr = AW'(a);
      @(posedge rclk); #1 re = 1'b0;
      check(rdata == model[a], $sformatf("read addr %0d", a));
      // hold: change the address with re low, data must stay
      raddr = AW'(a + 1);
      @(posedge rclk); @(posedge rclk); #1;
      check(rdata == model[a], $sformatf("hold addr %0d", a));
    end
    // overwrite while reading the other bank
    @(posedge wclk); #1 we = 1'b1; waddr = AW'(2**(AW-1)); model[2**(AW-1)] = rnd(); wdata = model[2**(AW-1)];
    @(posedge wclk); #1 we = 1'b0;
    @(posedge rclk); #1 re = 1'b1; raddr = AW'(2**(AW-1));
    @(posedge rclk); #1 re = 1'b0;
    check(rdata == model[2**(AW-1)], "rewritten word in bank 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
