// tb_psoc_pattern_top -- end-to-end testbench of the pattern generator, at
// the default (full) size: 32768-word instruction RAM, banks of 16384.
//
// The testbench plays the processor and the board: it builds a program of
// NCH chunks of 16384 instructions (four chunks, twice the RAM) in the SDRAM
// of the behavioural DMA model, programs the registers over AXI4-Lite,
// starts the ping-pong controller, waits for bank 0, starts the state
// machine through the EMIO line, answers WAIT instructions with a pulse on
// trigger input 2, and reads STATUS. ps_clk runs at 125 MHz, sm_clk at
// 100 MHz, unrelated.
//
// Every instruction has its own flag pattern, so the sequence of values on
// the 64 outputs and the time each is held are compared with a reference
// interpreter that walks the program in SDRAM order. A refill that came too
// late, or a wrong bank, would show as a wrong pattern.
//
// The program builder applies the bank-boundary rule of the host compiler:
// a LOOP that would sit on the last slot of a bank, or on the second-to-last
// slot followed by a LONG DELAY, is pushed to the start of the next bank with
// CONTINUE instructions, and the LOOP's delay is shortened by their length.
//
// Mechanisms counted (each must occur): bank refills, wrap of the address
// from bank 1 to bank 0, every opcode, loop repetitions, WAIT released by a
// trigger, CONTINUE insertion at a bank boundary, EMIO start, STATUS reads
// while waiting and after STOP, DMA stalls.
module tb_psoc_pattern_top;
  import psoc_pkg::*;

  localparam int unsigned AW   = 15;              // default of the top
  localparam int unsigned RAMW = 2**AW;
  localparam int unsigned BANK = 2**(AW-1);
  localparam int unsigned NCH  = 4;
  localparam int unsigned NW   = NCH * BANK;

  logic ps_clk = 1'b0, sm_clk = 1'b0;
  logic ps_rstn = 1'b0, sm_rstn = 1'b0;
  logic [7:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic [31:0] wdata = '0;
  logic [3:0]  wstrb = '0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [31:0] rdata;
  logic        emio_start = 1'b0;
  logic        dma_cmd_valid, dma_cmd_ready, dma_s_valid, dma_s_ready;
  logic [31:0] dma_cmd_addr, dma_cmd_len;
  logic [INSTR_W-1:0] dma_s_data;
  logic [3:0]  trig_in = '0;
  logic [FLAG_W-1:0] ttl_out;
  int          n_cmds;

  int checks = 0, failures = 0;

  always #4 ps_clk = ~ps_clk;
  always #5 sm_clk = ~sm_clk;

  psoc_pattern_top dut (
    .ps_clk, .ps_rstn, .sm_clk, .sm_rstn,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .emio_start,
    .dma_cmd_valid, .dma_cmd_ready, .dma_cmd_addr, .dma_cmd_len,
    .dma_s_valid, .dma_s_ready, .dma_s_data,
    .trig_in, .ttl_out
  );

  dma_sdram_model #(.W(INSTR_W), .N_WORDS(NW), .LAT(20), .STALLS(1'b1)) u_dma (
    .clk(ps_clk), .rst_n(ps_rstn),
    .cmd_valid(dma_cmd_valid), .cmd_ready(dma_cmd_ready),
    .cmd_addr(dma_cmd_addr), .cmd_len(dma_cmd_len),
    .s_valid(dma_s_valid), .s_ready(dma_s_ready), .s_data(dma_s_data), .n_cmds
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  // ---------------- program builder ----------------
  int  pos = 0;
  int  n_inserted = 0;
  int  wait_pos = -1;

  function automatic logic [FLAG_W-1:0] fl(int lin);
    return {16'hA5A5, 16'(lin / BANK), 32'(lin)};
  endfunction

  function automatic logic [DATA_W-1:0] ram_of(int lin);
    return DATA_W'(lin % RAMW);
  endfunction

  task automatic emit(input opcode_e op, input int data, input int delay);
    u_dma.mem[pos] = make_instr(fl(pos), op, DATA_W'(data), DELAY_W'(delay));
    pos++;
  endtask

  // LOOP with the bank-boundary rule of the host compiler.
  task automatic emit_loop(input int count, input int delay, input bit next_long);
    int slot = pos % BANK;
    int n = 0;
    if (slot == BANK - 1) n = 1;
    else if (next_long && slot == BANK - 2) n = 2;
    for (int k = 0; k < n; k++) emit(OP_CONTINUE, 0, 1);
    n_inserted += n;
    emit(OP_LOOP, count, delay - n);
  endtask

  task automatic emit_filler(input int upto);
    while (pos < upto) emit(OP_CONTINUE, 0, $urandom_range(2, 4));
  endtask

  task automatic build_program();
    for (int c = 0; c < NCH; c++) begin
      int b = c * BANK;
      int lstart, sub;
      emit_filler(b + 100);
      lstart = pos;                                   // loop, 3 passes
      emit_loop(3, 3, 1'b0);
      emit(OP_CONTINUE, 0, 2);
      emit(OP_END_LOOP, ram_of(lstart), 2);
      emit_filler(b + 200);
      emit(OP_JSR, ram_of(b + 16000), 2);             // subroutine call
      emit_filler(b + 300);
      emit(OP_LONG_DELAY, 4, 5);                      // 20 cycles
      emit_filler(b + 400);
      emit(OP_BRANCH, ram_of(b + 410), 2);            // skip 401..409
      emit_filler(b + 500);
      if (c == 1) begin wait_pos = pos; emit(OP_WAIT, 0, 3); end
      emit_filler(b + 15998);
      emit(OP_BRANCH, ram_of(b + 16002), 2);          // jump over the subroutine
      emit(OP_CONTINUE, 0, 2);                        // never executed
      emit(OP_CONTINUE, 0, 3);                        // subroutine at b+16000
      emit(OP_RTS, 0, 2);
      if (c == 0) begin
        // a "reps" LOOP / LONG DELAY / END LOOP that would start on the
        // second-to-last slot of the bank
        emit_filler(b + BANK - 2);
        lstart = pos;
        emit_loop(2, 6, 1'b1);
        lstart = pos - 1;
        emit(OP_LONG_DELAY, 3, 2);
        emit(OP_END_LOOP, ram_of(lstart), 2);
      end
      if (c == NCH - 1) begin
        emit_filler(b + BANK - 1);
        emit(OP_STOP, 0, 1);
      end else begin
        emit_filler(b + BANK);
      end
    end
  endtask

  // ---------------- reference interpreter ----------------
  logic [FLAG_W-1:0] exp_f[$];
  longint            exp_d[$];
  int n_op[16] = '{default: 0};
  int n_loop_rep = 0, n_wrap = 0;

  task automatic ref_run();
    int p = 0, ret = 0, lcnt = 0, steps = 0;
    bit lact = 0;
    forever begin
      instr_t i = u_dma.mem[p];
      longint d = (i.delay == 0) ? 1 : longint'(i.delay);
      int np = p + 1;
      int base = p - (p % RAMW);
      if (i.opcode == OP_LONG_DELAY && i.data > 1) d = d * longint'(i.data);
      if (i.opcode == OP_WAIT) d = -1;
      n_op[i.opcode]++;
      if (exp_f.size() > 0 && exp_f[$] == i.flags && d >= 0) exp_d[$] += d;
      else begin exp_f.push_back(i.flags); exp_d.push_back(d); end
      if (i.opcode == OP_STOP) break;
      case (i.opcode)
        OP_LOOP:     if (!lact) begin lact = 1; lcnt = (i.data == 0) ? 1 : int'(i.data); end
        OP_END_LOOP: if (lact && lcnt > 1) begin lcnt--; n_loop_rep++; np = base + int'(i.data); end
                     else lact = 0;
        OP_JSR:      begin ret = np; np = base + int'(i.data); end
        OP_RTS:      np = ret;
        OP_BRANCH:   np = base + int'(i.data);
        default: ;
      endcase
      if (np % RAMW == 0 && np > 0 && np != p) n_wrap++;
      p = np;
      if (++steps > 4 * NW) break;
    end
  endtask

  // ---------------- AXI4-Lite master ----------------
  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(posedge ps_clk);
    #1 awvalid = 1'b1; awaddr = a; wvalid = 1'b1; wdata = d; wstrb = 4'hF; bready = 1'b1;
    do @(posedge ps_clk); while (!(awready && wready));
    #1 awvalid = 1'b0; wvalid = 1'b0;
    do @(posedge ps_clk); while (!bvalid);
    #1 bready = 1'b0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(posedge ps_clk);
    #1 arvalid = 1'b1; araddr = a; rready = 1'b1;
    do @(posedge ps_clk); while (!arready);
    #1 arvalid = 1'b0;
    while (!rvalid) @(posedge ps_clk);
    d = rdata;
    @(posedge ps_clk); #1 rready = 1'b0;
  endtask

  // ---------------- output monitor ----------------
  logic [FLAG_W-1:0] obs_f[$];
  longint            obs_d[$];
  bit                mon_on = 1'b0;
  bit                mon_done = 1'b0;
  int                n_dma_stall = 0;

  always @(posedge ps_clk) if (dma_s_ready && !dma_s_valid && u_dma.busy) n_dma_stall++;

  initial begin : monitor
    logic [FLAG_W-1:0] cur;
    longint len;
    bit seen_first;
    wait (mon_on);
    cur = ttl_out;
    len = 0;
    seen_first = 1'b0;
    forever begin
      @(posedge sm_clk); #1;
      if (ttl_out != cur) begin
        if (seen_first) begin obs_f.push_back(cur); obs_d.push_back(len); end
        seen_first = 1'b1;
        cur = ttl_out;
        len = 0;
      end
      len++;
      if (cur == fl(NW - 1) && len > 4) begin   // STOP is the last word
        obs_f.push_back(cur);
        obs_d.push_back(-1);
        mon_done = 1'b1;
        break;
      end
    end
  end

  initial begin : watchdog
    #30ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    int n_wait_trig = 0, n_status_wait = 0, n_status_stop = 0, n_emio = 0;
    int max_ld = 0;
    build_program();
    check(pos == NW, $sformatf("program fills %0d chunks (%0d words)", NCH, pos));
    ref_run();
    repeat (4) @(posedge ps_clk);
    #1 ps_rstn = 1'b1; sm_rstn = 1'b1;
    axi_write(8'h04, 32'd2);                          // TRIG_SEL = input 2
    axi_write(8'h08, 32'd0);                          // DMA_BASE
    axi_write(8'h0C, 32'(NCH));                       // NUM_CHUNKS
    axi_write(8'h00, 32'h4);                          // ping-pong start
    do axi_read(8'h14, r); while (r < 1);             // bank 0 loaded
    mon_on = 1'b1;
    @(posedge ps_clk); #1 emio_start = 1'b1; n_emio++;
    repeat (5) @(posedge ps_clk);
    #1 emio_start = 1'b0;
    // serve WAIT instructions until the program stops
    while (!mon_done) begin
      @(posedge sm_clk);
      if (ttl_out == fl(wait_pos)) begin
        repeat (30) @(posedge ps_clk);
        axi_read(8'h10, r);
        if (r[1] && r[0]) n_status_wait++;
        #1 trig_in[1] = 1'b1;                         // wrong input: ignored
        repeat (10) @(posedge sm_clk);
        #1 check(ttl_out == fl(wait_pos), "WAIT ignores an unselected trigger input");
        #1 trig_in[2] = 1'b1;
        repeat (3) @(posedge sm_clk);
        #1 trig_in = '0;
        n_wait_trig++;
        wait (ttl_out != fl(wait_pos));
      end
    end
    repeat (20) @(posedge ps_clk);
    axi_read(8'h10, r);
    if (r[2] && !r[0]) n_status_stop++;
    check(r[4], "ping-pong done after the last chunk");
    axi_read(8'h14, r);
    check(r == 32'(NCH), $sformatf("CHUNKS_LOADED = %0d", r));

    // compare the output pattern with the reference
    check(obs_f.size() == exp_f.size(), $sformatf("%0d output segments, expected %0d", obs_f.size(), exp_f.size()));
    begin
      int bad = 0;
      for (int k = 0; k < exp_f.size() && k < obs_f.size(); k++) begin
        if (obs_f[k] != exp_f[k] || (exp_d[k] >= 0 && k < exp_f.size() - 1 && obs_d[k] != exp_d[k])) begin
          if (bad < 5) $display("segment %0d: got %h x%0d, expected %h x%0d", k, obs_f[k], obs_d[k], exp_f[k], exp_d[k]);
          bad++;
        end
      end
      check(bad == 0, $sformatf("%0d output segments differ", bad));
    end

    // mechanisms
    check(n_cmds == NCH && n_cmds > 2, $sformatf("bank refills: %0d DMA transfers", n_cmds));
    check(n_wrap > 0, $sformatf("address wrap bank 1 -> bank 0: %0d", n_wrap));
    for (int o = 0; o <= 8; o++) check(n_op[o] > 0, $sformatf("opcode %0d executed %0d times", o, n_op[o]));
    check(n_loop_rep > 0, $sformatf("loop repetitions: %0d", n_loop_rep));
    check(n_wait_trig > 0, $sformatf("WAIT released by trigger: %0d", n_wait_trig));
    check(n_inserted > 0, $sformatf("CONTINUE inserted at bank boundary: %0d", n_inserted));
    check(n_emio > 0, "EMIO start");
    check(n_status_wait > 0, "STATUS shows waiting");
    check(n_status_stop > 0, "STATUS shows stopped");
    check(n_dma_stall > 0, $sformatf("DMA stalls: %0d", n_dma_stall));
    $display("refills=%0d wraps=%0d loop_reps=%0d waits=%0d inserted=%0d stalls=%0d segments=%0d",
             n_cmds, n_wrap, n_loop_rep, n_wait_trig, n_inserted, n_dma_stall, obs_f.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
