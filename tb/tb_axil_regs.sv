// tb_axil_regs -- self-checking testbench of the AXI4-Lite register file.
//
// An AXI4-Lite master written here performs writes (address and data
// together, address first, data first, slow response acceptance) and reads,
// and checks register contents, byte strobes, the one-cycle command pulses of
// CTRL, the status inputs, reads of unmapped addresses and the one-cycle read
// latency.
module tb_axil_regs;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic [31:0] wdata = '0;
  logic [3:0]  wstrb = '0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [31:0] rdata;
  logic        sm_start, sm_abort, pp_start, pp_abort;
  logic [1:0]  trig_sel;
  logic [31:0] dma_base, num_chunks;
  logic [31:0] status = 32'h0000_002A, chunks_loaded = 32'd7;
  int n_sm_start = 0, n_sm_abort = 0, n_pp_start = 0, n_pp_abort = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axil_regs dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .sm_start, .sm_abort, .pp_start, .pp_abort,
    .trig_sel, .dma_base, .num_chunks, .status, .chunks_loaded
  );

  always @(posedge clk) if (rst_n) begin
    n_sm_start <= n_sm_start + int'(sm_start);
    n_sm_abort <= n_sm_abort + int'(sm_abort);
    n_pp_start <= n_pp_start + int'(pp_start);
    n_pp_abort <= n_pp_abort + int'(pp_abort);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mode 0: AW and W together, 1: AW two cycles before W, 2: W two cycles before AW
  task automatic axi_write(input logic [7:0] a, input logic [31:0] d, input logic [3:0] be, input int mode);
    @(posedge clk);
    fork
      begin
        if (mode == 2) repeat (2) @(posedge clk);
        #1 awvalid = 1'b1; awaddr = a;
        do @(posedge clk); while (!awready);
        #1 awvalid = 1'b0;
      end
      begin
        if (mode == 1) repeat (2) @(posedge clk);
        #1 wvalid = 1'b1; wdata = d; wstrb = be;
        do @(posedge clk); while (!wready);
        #1 wvalid = 1'b0;
      end
    join
    // keep bready low for two cycles to check that the response is held
    repeat (2) @(posedge clk);
    #1 check(bvalid && bresp == 2'b00, "write response held");
    bready = 1'b1;
    @(posedge clk); #1 bready = 1'b0;
    check(!bvalid, "write response taken");
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    int lat = 0;
    @(posedge clk); #1 arvalid = 1'b1; araddr = a;
    @(posedge clk);
    check(arready, "arready");
    #1 arvalid = 1'b0;
    check(rvalid, "read data one cycle after AR");
    rready = 1'b1;
    d = rdata;
    @(posedge clk); #1 rready = 1'b0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    axi_write(8'h08, 32'h1234_5678, 4'hF, 0);
    axi_read(8'h08, r);  check(r == 32'h1234_5678 && dma_base == r, "DMA_BASE");
    axi_write(8'h08, 32'hAABB_CCDD, 4'b0101, 1);
    axi_read(8'h08, r);  check(r == 32'h12BB_56DD, $sformatf("byte strobes: %h", r));
    axi_write(8'h0C, 32'd500, 4'hF, 2);
    axi_read(8'h0C, r);  check(r == 32'd500 && num_chunks == 32'd500, "NUM_CHUNKS");
    axi_write(8'h04, 32'h0000_0003, 4'hF, 0);
    axi_read(8'h04, r);  check(r == 32'd3 && trig_sel == 2'd3, "TRIG_SEL");
    axi_read(8'h10, r);  check(r == status, "STATUS");
    axi_read(8'h14, r);  check(r == 32'd7, "CHUNKS_LOADED");
    axi_read(8'h40, r);  check(r == 32'd0, "unmapped reads 0");
    axi_read(8'h00, r);  check(r == 32'd0, "CTRL reads 0");
    axi_write(8'h00, 32'h1, 4'hF, 0);
    axi_write(8'h00, 32'h4, 4'hF, 1);
    axi_write(8'h00, 32'h2, 4'hF, 2);
    axi_write(8'h00, 32'h8, 4'hF, 0);
    axi_write(8'h00, 32'h5, 4'hF, 0);
    repeat (2) @(posedge clk);
    #1 check(n_sm_start == 2 && n_pp_start == 2 && n_sm_abort == 1 && n_pp_abort == 1,
             $sformatf("command pulses %0d %0d %0d %0d", n_sm_start, n_pp_start, n_sm_abort, n_pp_abort));
    axi_write(8'h20, 32'hFFFF_FFFF, 4'hF, 0);
    axi_read(8'h08, r);  check(r == 32'h12BB_56DD, "unmapped write ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
