// psoc_pattern_top -- programmable-logic top of the 64-channel pattern generator.
//
// The design is a clock and digital pattern generator for an atomic physics
// experiment: a state machine replays a list of 128-bit instructions, each
// setting 64 TTL outputs for a programmed number of clock cycles, with loops,
// subroutines, branches, long delays and waits for a hardware trigger. The
// program is kept in SDRAM by the on-chip processor and streamed through a
// DMA channel into a two-bank instruction RAM by the ping-pong controller, so
// programs can be far longer than the RAM.
//
// Two clock domains:
//  - ps_clk: processor side. AXI4-Lite registers (axil_regs), the EMIO start
//    line, the ping-pong controller (pingpong_ctrl) and the DMA ports.
//  - sm_clk: output side, 100 MHz nominal, optionally from a PLL locked to an
//    external reference. State machine (pattern_sm), trigger inputs
//    (trigger_in) and the TTL outputs.
// The instruction RAM (instr_ram) is written on ps_clk and read on sm_clk.
// Command pulses cross to sm_clk through toggle synchronisers (pulse_sync);
// the trigger select, the state machine's status bits and the bank it is
// executing cross through two-flop synchronisers.
//
// Operation: write DMA_BASE and NUM_CHUNKS, start the ping-pong controller
// (CTRL bit2), wait until CHUNKS_LOADED >= 1, then start the state machine
// (CTRL bit0 or a rising edge on emio_start). The ping-pong controller then
// refills each bank after the state machine leaves it.
//
// STATUS (0x10): bit0 running, bit1 waiting for trigger, bit2 stopped,
// bit3 ping-pong loading, bit4 ping-pong done, bit5 last_bank.
//
// The block structure and connections follow the paper; the register map,
// the DMA handshake and the EMIO use are this design's choices. The DMA
// engine, the SDRAM, the processor and the PLL are outside this module.
module psoc_pattern_top
  import psoc_pkg::*;
#(
  parameter int unsigned AW = 15
) (
  input  logic              ps_clk,
  input  logic              ps_rstn,
  input  logic              sm_clk,
  input  logic              sm_rstn,
  // AXI4-Lite slave from the processor
  input  logic [7:0]        s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [7:0]        s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // EMIO line from the processor
  input  logic              emio_start,
  // DMA channel from SDRAM
  output logic              dma_cmd_valid,
  input  logic              dma_cmd_ready,
  output logic [31:0]       dma_cmd_addr,
  output logic [31:0]       dma_cmd_len,
  input  logic              dma_s_valid,
  output logic              dma_s_ready,
  input  logic [INSTR_W-1:0] dma_s_data,
  // carrier board
  input  logic [3:0]        trig_in,
  output logic [FLAG_W-1:0] ttl_out
);

  // ---------------- PS clock domain ----------------
  logic        axi_sm_start, axi_sm_abort, pp_start, pp_abort;
  logic [1:0]  trig_sel_ps;
  logic [31:0] dma_base, num_chunks, chunks_loaded, status;
  logic        pp_last_bank, pp_loading, pp_done;
  logic        emio_q, emio_d;
  logic        ps_sm_start;
  logic        ram_we;
  logic [AW-1:0] ram_waddr;
  logic [INSTR_W-1:0] ram_wdata;
  logic        run_ps, wait_ps, stop_ps;

  // ---------------- SM clock domain ----------------
  logic        sm_start, sm_abort, sm_trig;
  logic [1:0]  trig_sel_sm;
  logic        rd_en;
  logic [AW-1:0] rd_addr, pc;
  instr_t      rd_data;
  logic        running, waiting, stopped;

  axil_regs u_regs (
    .clk(ps_clk), .rst_n(ps_rstn),
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .sm_start(axi_sm_start), .sm_abort(axi_sm_abort),
    .pp_start, .pp_abort,
    .trig_sel(trig_sel_ps), .dma_base, .num_chunks,
    .status, .chunks_loaded
  );

  // EMIO start: rising edge of the (asynchronous) GPIO level.
  sync_2ff u_emio_sync (.clk(ps_clk), .rst_n(ps_rstn), .d(emio_start), .q(emio_q));
  always_ff @(posedge ps_clk or negedge ps_rstn) begin
    if (!ps_rstn) emio_d <= 1'b0;
    else          emio_d <= emio_q;
  end
  assign ps_sm_start = axi_sm_start || (emio_q && !emio_d);

  sync_2ff u_run_sync  (.clk(ps_clk), .rst_n(ps_rstn), .d(running), .q(run_ps));
  sync_2ff u_wait_sync (.clk(ps_clk), .rst_n(ps_rstn), .d(waiting), .q(wait_ps));
  sync_2ff u_stop_sync (.clk(ps_clk), .rst_n(ps_rstn), .d(stopped), .q(stop_ps));
  assign status = {26'd0, pp_last_bank, pp_done, pp_loading, stop_ps, wait_ps, run_ps};

  pingpong_ctrl #(.AW(AW), .W(INSTR_W)) u_pingpong (
    .clk(ps_clk), .rst_n(ps_rstn),
    .start(pp_start), .abort(pp_abort),
    .base_addr(dma_base), .num_chunks,
    .sm_bank_async(pc[AW-1]),
    .cmd_valid(dma_cmd_valid), .cmd_ready(dma_cmd_ready),
    .cmd_addr(dma_cmd_addr), .cmd_len(dma_cmd_len),
    .s_valid(dma_s_valid), .s_ready(dma_s_ready), .s_data(dma_s_data),
    .ram_we, .ram_waddr, .ram_wdata,
    .last_bank(pp_last_bank), .chunks_loaded,
    .loading(pp_loading), .done(pp_done)
  );

  instr_ram #(.AW(AW), .W(INSTR_W)) u_ram (
    .wclk(ps_clk), .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata),
    .rclk(sm_clk), .re(rd_en), .raddr(rd_addr), .rdata(rd_data)
  );

  // ---------------- crossings to the SM clock ----------------
  pulse_sync u_start_cdc (.src_clk(ps_clk), .src_rst_n(ps_rstn), .src_pulse(ps_sm_start),
                          .dst_clk(sm_clk), .dst_rst_n(sm_rstn), .dst_pulse(sm_start));
  pulse_sync u_abort_cdc (.src_clk(ps_clk), .src_rst_n(ps_rstn), .src_pulse(axi_sm_abort),
                          .dst_clk(sm_clk), .dst_rst_n(sm_rstn), .dst_pulse(sm_abort));
  sync_2ff u_sel0_sync (.clk(sm_clk), .rst_n(sm_rstn), .d(trig_sel_ps[0]), .q(trig_sel_sm[0]));
  sync_2ff u_sel1_sync (.clk(sm_clk), .rst_n(sm_rstn), .d(trig_sel_ps[1]), .q(trig_sel_sm[1]));

  trigger_in #(.N_IN(4)) u_trig (
    .clk(sm_clk), .rst_n(sm_rstn), .trig_in, .sel(trig_sel_sm), .trig_pulse(sm_trig)
  );

  pattern_sm #(.AW(AW)) u_sm (
    .clk(sm_clk), .rst_n(sm_rstn),
    .start(sm_start), .abort(sm_abort), .trig(sm_trig),
    .rd_en, .rd_addr, .rd_data,
    .ttl_out, .pc,
    .running, .waiting, .stopped
  );

endmodule
