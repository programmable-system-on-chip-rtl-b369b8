// tb_pattern_sm -- self-checking testbench of the state machine.
//
// A small program memory (a registered, read-enabled array like the real
// RAM) feeds pattern_sm. Every instruction carries a unique flag pattern, so
// the sequence of values on ttl_out and how long each value is held can be
// compared with a reference interpreter written here from the instruction
// table: CONTINUE, LOOP/END LOOP, JSR/RTS, BRANCH, LONG DELAY, zero delay and
// STOP in a directed program, then a random program, then WAIT with a
// trigger pulse (cycle count from trigger to the next output), a trigger
// already present when WAIT starts, and abort.
// The start-to-first-output latency (2 cycles) is checked as well.
module tb_pattern_sm;
  import psoc_pkg::*;

  localparam int unsigned AW = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0, abort = 1'b0, trig = 1'b0;
  logic rd_en;
  logic [AW-1:0] rd_addr, pc;
  instr_t rd_data;
  logic [FLAG_W-1:0] ttl_out;
  logic running, waiting, stopped;

  instr_t prog [2**AW];

  int checks = 0;
  int failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always_ff @(posedge clk) if (rd_en) rd_data <= prog[rd_addr];

  pattern_sm #(.AW(AW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cyc);
    end
  endtask

  function automatic logic [FLAG_W-1:0] fl(int a);
    return {32'hC0DE_0000 | 32'(a), 32'(a * 7 + 1)};
  endfunction

  // ---------- reference interpreter (no WAIT) ----------
  logic [FLAG_W-1:0] exp_f[$];
  longint            exp_d[$];

  task automatic ref_run();
    int p = 0;
    int lcnt = 0;
    bit lact = 0;
    int ret = 0;
    int steps = 0;
    exp_f.delete();
    exp_d.delete();
    forever begin
      instr_t i = prog[p];
      longint d = (i.delay == 0) ? 1 : longint'(i.delay);
      int np = (p + 1) % (2**AW);
      if (i.opcode == OP_LONG_DELAY && i.data > 1) d = d * longint'(i.data);
      if (exp_f.size() > 0 && exp_f[$] == i.flags) exp_d[$] += d;
      else begin exp_f.push_back(i.flags); exp_d.push_back(d); end
      if (i.opcode == OP_STOP) break;
      case (i.opcode)
        OP_LOOP:     if (!lact) begin lact = 1; lcnt = (i.data == 0) ? 1 : int'(i.data); end
        OP_END_LOOP: if (lact && lcnt > 1) begin lcnt--; np = int'(i.data) % (2**AW); end
                     else lact = 0;
        OP_JSR:      begin ret = np; np = int'(i.data) % (2**AW); end
        OP_RTS:      np = ret;
        OP_BRANCH:   np = int'(i.data) % (2**AW);
        default: ;
      endcase
      p = np;
      steps++;
      if (steps > 100000) break;
    end
  endtask

  // ---------- observed segments ----------
  logic [FLAG_W-1:0] obs_f[$];
  longint            obs_d[$];
  longint            t_start, t_first;

  // Start the program and record ttl_out segments until the machine stops.
  task automatic run_and_record(input int max_cycles);
    logic [FLAG_W-1:0] cur;
    longint len;
    int n;
    obs_f.delete();
    obs_d.delete();
    @(posedge clk); #1 start = 1'b1;
    @(posedge clk); #1 t_start = cyc; start = 1'b0;
    cur = ttl_out;
    len = 0;
    t_first = -1;
    n = 0;
    while (n < max_cycles) begin
      @(posedge clk); #1;
      n++;
      if (ttl_out != cur) begin
        if (t_first < 0) t_first = cyc;
        else begin obs_f.push_back(cur); obs_d.push_back(len); end
        cur = ttl_out;
        len = 0;
      end
      len++;
      if (stopped && len > 8) break;
    end
    obs_f.push_back(cur);
    obs_d.push_back(-1);   // last segment (STOP) is open-ended
  endtask

  task automatic compare(input string name);
    check(obs_f.size() == exp_f.size(), $sformatf("%s: %0d segments, expected %0d", name, obs_f.size(), exp_f.size()));
    for (int k = 0; k < exp_f.size() && k < obs_f.size(); k++) begin
      check(obs_f[k] == exp_f[k], $sformatf("%s: segment %0d flags %h expected %h", name, k, obs_f[k], exp_f[k]));
      if (k < exp_f.size() - 1)
        check(obs_d[k] == exp_d[k], $sformatf("%s: segment %0d lasted %0d expected %0d", name, k, obs_d[k], exp_d[k]));
    end
    check(stopped, {name, ": stopped after STOP"});
    check(t_first - t_start == 1, $sformatf("%s: first output %0d cycles after start edge", name, t_first - t_start));
  endtask

  task automatic clear_prog();
    for (int a = 0; a < 2**AW; a++) prog[a] = make_instr(fl(a), OP_CONTINUE, '0, 32'd1);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_data = '0;
    clear_prog();
    // ---- directed program ----
    prog[0]  = make_instr(fl(0),  OP_CONTINUE,   '0,  32'd3);
    prog[1]  = make_instr(fl(1),  OP_LOOP,       20'd3, 32'd2);
    prog[2]  = make_instr(fl(2),  OP_CONTINUE,   '0,  32'd1);
    prog[3]  = make_instr(fl(3),  OP_END_LOOP,   20'd1, 32'd4);
    prog[4]  = make_instr(fl(4),  OP_JSR,        20'd20, 32'd2);
    prog[5]  = make_instr(fl(5),  OP_LONG_DELAY, 20'd5, 32'd3);
    prog[6]  = make_instr(fl(6),  OP_BRANCH,     20'd10, 32'd2);
    prog[10] = make_instr(fl(10), OP_LOOP,       20'd1, 32'd1);
    prog[11] = make_instr(fl(11), OP_END_LOOP,   20'd10, 32'd1);
    prog[12] = make_instr(fl(12), OP_CONTINUE,   '0,  32'd0);
    prog[13] = make_instr(fl(13), OP_LOOP,       20'd0, 32'd2);
    prog[14] = make_instr(fl(14), OP_END_LOOP,   20'd13, 32'd2);
    prog[15] = make_instr(fl(15), OP_STOP,       '0,  32'd5);
    prog[20] = make_instr(fl(20), OP_CONTINUE,   '0,  32'd2);
    prog[21] = make_instr(fl(21), OP_RTS,        '0,  32'd3);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    ref_run();
    run_and_record(5000);
    compare("directed");
    check(pc == AW'(15), "pc at STOP");
    repeat (10) @(posedge clk);
    #1 check(ttl_out == fl(15) && stopped, "outputs held after STOP");

    // ---- random program (restart from the stopped state) ----
    clear_prog();
    for (int a = 0; a < 60; a++) begin
      automatic int r = $urandom_range(0, 9);
      automatic logic [31:0] d = 32'($urandom_range(0, 6));
      if (r < 6)       prog[a] = make_instr(fl(a), OP_CONTINUE, '0, d);
      else if (r < 8)  prog[a] = make_instr(fl(a), OP_LONG_DELAY, 20'($urandom_range(0, 4)), d);
      else             prog[a] = make_instr(fl(a), opcode_e'(4'($urandom_range(9, 15))), '0, d);
    end
    prog[20] = make_instr(fl(20), OP_LOOP, 20'($urandom_range(2, 5)), 32'd2);
    prog[24] = make_instr(fl(24), OP_END_LOOP, 20'd20, 32'd3);
    prog[30] = make_instr(fl(30), OP_JSR, 20'd100, 32'd1);
    prog[100] = make_instr(fl(100), OP_CONTINUE, '0, 32'd4);
    prog[101] = make_instr(fl(101), OP_RTS, '0, 32'd1);
    prog[60] = make_instr(fl(60), OP_STOP, '0, 32'd1);
    ref_run();
    run_and_record(20000);
    compare("random");

    // ---- WAIT and trigger ----
    clear_prog();
    prog[0] = make_instr(fl(0), OP_CONTINUE, '0, 32'd2);
    prog[1] = make_instr(fl(1), OP_WAIT,     '0, 32'd4);
    prog[2] = make_instr(fl(2), OP_CONTINUE, '0, 32'd3);
    prog[3] = make_instr(fl(3), OP_WAIT,     '0, 32'd1);
    prog[4] = make_instr(fl(4), OP_STOP,     '0, 32'd1);
    @(posedge clk); #1 start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    repeat (40) @(posedge clk);
    #1 check(waiting && running, "WAIT holds without trigger");
    check(ttl_out == fl(1), "WAIT flags on outputs while waiting");
    begin
      automatic int n = 0;
      trig = 1'b1;
      @(posedge clk); #1 trig = 1'b0;
      n = 1;
      while (ttl_out != fl(2) && n < 50) begin @(posedge clk); #1 n++; end
      check(n == 5, $sformatf("WAIT: next output %0d cycles after trigger, expected delay+1 = 5", n));
      check(!waiting, "left WAIT after trigger");
      // trigger arriving the first cycle of the second WAIT
      while (ttl_out != fl(3) && n < 100) begin @(posedge clk); #1 n++; end
      repeat (5) @(posedge clk);
      #1 check(waiting, "second WAIT waiting");
      trig = 1'b1;
      @(posedge clk); #1 trig = 1'b0;
      repeat (3) @(posedge clk);
      #1 check(stopped && ttl_out == fl(4), "STOP after second WAIT");
    end

    // ---- trigger present in the first cycle of WAIT: WAIT lasts its delay ----
    clear_prog();
    prog[0] = make_instr(fl(0), OP_CONTINUE, '0, 32'd2);
    prog[1] = make_instr(fl(1), OP_WAIT,     '0, 32'd3);
    prog[2] = make_instr(fl(2), OP_WAIT,     '0, 32'd1);
    prog[3] = make_instr(fl(3), OP_CONTINUE, '0, 32'd2);
    prog[4] = make_instr(fl(4), OP_STOP,     '0, 32'd1);
    trig = 1'b1;
    ref_run();
    run_and_record(200);
    compare("trigger at WAIT entry");
    trig = 1'b0;

    // ---- abort ----
    prog[1] = make_instr(fl(1), OP_WAIT, '0, 32'd4);
    @(posedge clk); #1 start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    repeat (20) @(posedge clk);
    #1 abort = 1'b1;
    @(posedge clk); #1 abort = 1'b0;
    check(!running && !waiting && !stopped, "abort returns to idle");
    repeat (5) @(posedge clk);
    #1 check(!running, "stays idle after abort");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
