// tb_long_program -- runs a program that fills the whole SDRAM program space:
// 8,192,000 instructions (500 banks of 16384) through the full-size design.
//
// The program (long_prog_pkg) is generated word by word by the DMA model.
// The processor side is played over AXI4-Lite: NUM_CHUNKS = 500, start the
// ping-pong controller, wait for bank 0, start the state machine. A streaming
// reference interpreter follows the same program and every output value and
// its duration is compared as it ends, so nothing is stored. Checked: all
// 8,192,000 instructions (plus loop repetitions) appear in order with their
// exact durations, 500 DMA transfers, the address wraps from bank 1 to bank
// 0 249 times, and the controller reports done.
module tb_long_program;
  import psoc_pkg::*;
  import long_prog_pkg::*;

  localparam int unsigned NCH = 500;
  localparam int unsigned NW  = NCH * BANK;

  logic ps_clk = 1'b0, sm_clk = 1'b0;
  logic ps_rstn = 1'b0, sm_rstn = 1'b0;
  logic [7:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic [31:0] wdata = '0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [31:0] rdata;
  logic        dma_cmd_valid, dma_cmd_ready, dma_s_valid, dma_s_ready;
  logic [31:0] dma_cmd_addr, dma_cmd_len;
  logic [INSTR_W-1:0] dma_s_data;
  logic [FLAG_W-1:0] ttl_out;
  int n_cmds;
  int checks = 0, failures = 0;

  always #4 ps_clk = ~ps_clk;
  always #5 sm_clk = ~sm_clk;

  psoc_pattern_top dut (
    .ps_clk, .ps_rstn, .sm_clk, .sm_rstn,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hF), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .emio_start(1'b0),
    .dma_cmd_valid, .dma_cmd_ready, .dma_cmd_addr, .dma_cmd_len,
    .dma_s_valid, .dma_s_ready, .dma_s_data,
    .trig_in(4'd0), .ttl_out
  );

  dma_gen_model #(.N_WORDS(NW), .LAT(20)) u_dma (
    .clk(ps_clk), .rst_n(ps_rstn),
    .cmd_valid(dma_cmd_valid), .cmd_ready(dma_cmd_ready),
    .cmd_addr(dma_cmd_addr), .cmd_len(dma_cmd_len),
    .s_valid(dma_s_valid), .s_ready(dma_s_ready), .s_data(dma_s_data), .n_cmds
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(posedge ps_clk);
    #1 awvalid = 1'b1; awaddr = a; wvalid = 1'b1; wdata = d; bready = 1'b1;
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

  // streaming reference
  int unsigned rp = 0;
  int unsigned rret = 0;
  bit          rlact = 0;
  int unsigned rlcnt = 0;
  int unsigned n_wrap = 0;
  longint      n_seg = 0, n_bad = 0;

  task automatic ref_next(output logic [FLAG_W-1:0] f, output longint d, output bit is_stop);
    instr_t i = gen_word(rp, NW);
    int unsigned np = rp + 1;
    int unsigned base = rp - (rp % RAMW);
    f = i.flags;
    d = (i.delay == 0) ? 1 : longint'(i.delay);
    is_stop = (i.opcode == OP_STOP);
    case (i.opcode)
      OP_LOOP:     if (!rlact) begin rlact = 1; rlcnt = i.data; end
      OP_END_LOOP: if (rlact && rlcnt > 1) begin rlcnt--; np = base + i.data; end
                   else rlact = 0;
      default: ;
    endcase
    if (np % RAMW == 0) n_wrap++;
    rp = np;
  endtask

  initial begin : watchdog
    #2s;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    logic [FLAG_W-1:0] cur, ef;
    longint len, ed;
    bit stop;
    repeat (4) @(posedge ps_clk);
    #1 ps_rstn = 1'b1; sm_rstn = 1'b1;
    axi_write(8'h08, 32'd0);
    axi_write(8'h0C, 32'(NCH));
    axi_write(8'h00, 32'h4);
    do axi_read(8'h14, r); while (r < 1);
    axi_write(8'h00, 32'h1);
    // wait for the first instruction
    cur = ttl_out;
    while (ttl_out == cur) begin @(posedge sm_clk); #1; end
    cur = ttl_out;
    len = 1;
    stop = 0;
    while (!stop) begin
      @(posedge sm_clk); #1;
      if (ttl_out != cur || (cur == gen_word(NW - 1, NW).flags && len > 4)) begin
        ref_next(ef, ed, stop);
        n_seg++;
        if (cur != ef || (!stop && len != ed)) begin
          n_bad++;
          if (n_bad < 5) $display("segment %0d: got %h x%0d, expected %h x%0d", n_seg, cur, len, ef, ed);
        end
        cur = ttl_out;
        len = 0;
      end
      len++;
    end
    check(n_bad == 0, $sformatf("%0d of %0d output values wrong", n_bad, n_seg));
    check(rp == NW - 1 + 1, $sformatf("reference reached word %0d of %0d", rp, NW));
    check(n_seg == longint'(NW) + NCH * 3, $sformatf("%0d output values (8,192,000 words + 500 repeated 3-word loop bodies)", n_seg));
    check(n_cmds == NCH, $sformatf("%0d DMA transfers", n_cmds));
    check(n_wrap == NCH / 2 - 1 || n_wrap == NCH / 2, $sformatf("%0d wraps from bank 1 to bank 0", n_wrap));
    axi_read(8'h10, r);
    check(r[4] && r[2], "STATUS: ping-pong done, state machine stopped");
    $display("segments=%0d transfers=%0d wraps=%0d", n_seg, n_cmds, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
