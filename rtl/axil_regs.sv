// axil_regs -- AXI4-Lite register file of the pattern generator.
//
// The processor programs and watches the programmable logic through these
// registers (32-bit, byte addresses):
//   0x00 CTRL          W   write 1 to: bit0 start the state machine,
//                          bit1 abort it, bit2 start the ping-pong
//                          controller, bit3 abort it (one-cycle pulses;
//                          reads as 0)
//   0x04 TRIG_SEL      RW  bits 1:0, which trigger input WAIT listens to
//   0x08 DMA_BASE      RW  SDRAM byte address of the program
//   0x0C NUM_CHUNKS    RW  program length in banks (chunks)
//   0x10 STATUS        R   status input word
//   0x14 CHUNKS_LOADED R   chunks the ping-pong controller has loaded
// Unmapped addresses read 0 and ignore writes; every response is OKAY.
//
// Timing: one transaction at a time. A write needs both AW and W (they may
// come in either order or together); the response comes one cycle after the
// last of them is accepted, and the command pulses and register updates take
// effect in the same cycle as the accepting edge. A read returns its data one
// cycle after AR is accepted. The paper only says that configuration
// registers are mapped through AXI-lite; this register map is this design's.
module axil_regs (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [7:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  // registers
  output logic        sm_start,
  output logic        sm_abort,
  output logic        pp_start,
  output logic        pp_abort,
  output logic [1:0]  trig_sel,
  output logic [31:0] dma_base,
  output logic [31:0] num_chunks,
  input  logic [31:0] status,
  input  logic [31:0] chunks_loaded
);

  localparam logic [7:0] A_CTRL     = 8'h00;
  localparam logic [7:0] A_TRIG_SEL = 8'h04;
  localparam logic [7:0] A_DMA_BASE = 8'h08;
  localparam logic [7:0] A_NCHUNK   = 8'h0C;
  localparam logic [7:0] A_STATUS   = 8'h10;
  localparam logic [7:0] A_LOADED   = 8'h14;

  logic        aw_held, w_held;
  logic [7:0]  awaddr_q;
  logic [31:0] wdata_q;
  logic [3:0]  wstrb_q;
  logic        do_write;
  logic [7:0]  waddr;
  logic [31:0] wdata;
  logic [3:0]  wstrb;

  // Accept AW and W while no response is pending.
  assign s_axi_awready = !aw_held && !s_axi_bvalid;
  assign s_axi_wready  = !w_held  && !s_axi_bvalid;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  assign waddr    = aw_held ? awaddr_q : s_axi_awaddr;
  assign wdata    = w_held  ? wdata_q  : s_axi_wdata;
  assign wstrb    = w_held  ? wstrb_q  : s_axi_wstrb;
  assign do_write = (aw_held || (s_axi_awvalid && s_axi_awready)) &&
                    (w_held  || (s_axi_wvalid  && s_axi_wready));

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] nw, logic [3:0] be);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = be[b] ? nw[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_held      <= 1'b0;
      w_held       <= 1'b0;
      awaddr_q     <= '0;
      wdata_q      <= '0;
      wstrb_q      <= '0;
      s_axi_bvalid <= 1'b0;
      sm_start     <= 1'b0;
      sm_abort     <= 1'b0;
      pp_start     <= 1'b0;
      pp_abort     <= 1'b0;
      trig_sel     <= '0;
      dma_base     <= '0;
      num_chunks   <= '0;
    end else begin
      sm_start <= 1'b0;
      sm_abort <= 1'b0;
      pp_start <= 1'b0;
      pp_abort <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (do_write) begin
        aw_held      <= 1'b0;
        w_held       <= 1'b0;
        s_axi_bvalid <= 1'b1;
        unique case (waddr)
          A_CTRL: if (wstrb[0]) begin
            sm_start <= wdata[0];
            sm_abort <= wdata[1];
            pp_start <= wdata[2];
            pp_abort <= wdata[3];
          end
          A_TRIG_SEL: if (wstrb[0]) trig_sel <= wdata[1:0];
          A_DMA_BASE: dma_base   <= merge(dma_base, wdata, wstrb);
          A_NCHUNK:   num_chunks <= merge(num_chunks, wdata, wstrb);
          default: ;
        endcase
      end else begin
        if (s_axi_awvalid && s_axi_awready) begin
          aw_held  <= 1'b1;
          awaddr_q <= s_axi_awaddr;
        end
        if (s_axi_wvalid && s_axi_wready) begin
          w_held  <= 1'b1;
          wdata_q <= s_axi_wdata;
          wstrb_q <= s_axi_wstrb;
        end
      end
    end
  end

  // Read channel.
  assign s_axi_arready = !s_axi_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (s_axi_arvalid && s_axi_arready) begin
        s_axi_rvalid <= 1'b1;
        unique case (s_axi_araddr)
          A_TRIG_SEL: s_axi_rdata <= {30'd0, trig_sel};
          A_DMA_BASE: s_axi_rdata <= dma_base;
          A_NCHUNK:   s_axi_rdata <= num_chunks;
          A_STATUS:   s_axi_rdata <= status;
          A_LOADED:   s_axi_rdata <= chunks_loaded;
          default:    s_axi_rdata <= '0;
        endcase
      end
    end
  end

  // AXI rule: a response, once valid, is held until taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule
