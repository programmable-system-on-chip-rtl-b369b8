// tb_pingpong_ctrl -- self-checking testbench of the ping-pong controller.
//
// The controller (reduced to banks of 16 words, AW = 5) is connected to the
// behavioural DMA/SDRAM model, holding a 6-chunk program at a non-zero base
// address, and to a copy of the RAM kept here. The testbench plays the state
// machine by moving the bank bit, and checks the bank-switching algorithm
// step by step: bank 0 loaded first and last_bank = 1; bank 1 loaded at once
// while the state machine is in bank 0; no transfer while the state machine
// stays in last_bank; each bank change refills the bank just left with the
// next chunk; the DMA addresses; the word-per-cycle transfer rate; stopping
// after NUM_CHUNKS; abort and restart.
module tb_pingpong_ctrl;

  localparam int unsigned AW = 5;
  localparam int unsigned W  = 128;
  localparam int unsigned BW = 2**(AW-1);
  localparam int unsigned NCH = 5;
  localparam logic [31:0] BASE = 32'h0000_0100;   // word 16 of the SDRAM

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, abort = 1'b0;
  logic [31:0] num_chunks = NCH;
  logic sm_bank = 1'b0;
  logic cmd_valid, cmd_ready, s_valid, s_ready;
  logic [31:0] cmd_addr, cmd_len;
  logic [W-1:0] s_data;
  logic ram_we;
  logic [AW-1:0] ram_waddr;
  logic [W-1:0] ram_wdata;
  logic last_bank, loading, done;
  logic [31:0] chunks_loaded;
  int n_cmds;

  logic [W-1:0] ram [2**AW];
  logic [31:0]  cmd_log[$];
  int checks = 0, failures = 0;
  longint cyc = 0;
  int beats = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  pingpong_ctrl #(.AW(AW), .W(W)) dut (
    .clk, .rst_n, .start, .abort, .base_addr(BASE), .num_chunks,
    .sm_bank_async(sm_bank),
    .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len,
    .s_valid, .s_ready, .s_data,
    .ram_we, .ram_waddr, .ram_wdata,
    .last_bank, .chunks_loaded, .loading, .done
  );

  dma_sdram_model #(.W(W), .N_WORDS(256), .LAT(3), .STALLS(1'b0)) u_dma (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len,
    .s_valid, .s_ready, .s_data, .n_cmds
  );

  always @(posedge clk) begin
    if (ram_we) begin ram[ram_waddr] <= ram_wdata; beats <= beats + 1; end
    if (cmd_valid && cmd_ready) cmd_log.push_back(cmd_addr);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  task automatic wait_loaded(input int n);
    int t = 0;
    while (chunks_loaded != 32'(n) && t < 2000) begin @(posedge clk); #1 t++; end
    check(chunks_loaded == 32'(n), $sformatf("chunk %0d loaded", n));
  endtask

  task automatic check_bank(input int bank, input int chunk);
    int errs = 0;
    for (int k = 0; k < BW; k++)
      if (ram[bank * BW + k] != u_dma.mem[BASE / 16 + chunk * BW + k]) errs++;
    check(errs == 0, $sformatf("bank %0d holds chunk %0d (%0d bad words)", bank, chunk, errs));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    for (int k = 0; k < 256; k++) u_dma.mem[k] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    sm_bank = 1'b1;                      // state machine not yet in bank 0
    @(posedge clk); #1 start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    t0 = cyc;
    wait_loaded(1);
    check_bank(0, 0);
    check(last_bank == 1'b1, "last_bank = 1 after loading bank 0");
    check(cmd_len == 32'(BW * 16), "transfer length is one bank");
    // DMA latency 3, 1 cycle command, then one word per cycle
    check(cyc - t0 <= longint'(BW + 8), $sformatf("bank load took %0d cycles for %0d words", cyc - t0, BW));
    repeat (40) @(posedge clk);
    #1 check(n_cmds == 1 && chunks_loaded == 1, "no refill while state machine is in last_bank");
    sm_bank = 1'b0;                      // state machine starts in bank 0
    wait_loaded(2);
    check_bank(1, 1);
    check_bank(0, 0);
    check(last_bank == 1'b0, "last_bank = 0 after loading bank 1");
    repeat (40) @(posedge clk);
    #1 check(n_cmds == 2, "idle while in bank 0");
    sm_bank = 1'b1;
    wait_loaded(3);
    check_bank(0, 2);
    check_bank(1, 1);
    check(last_bank == 1'b1, "last_bank = 1 after refilling bank 0");
    sm_bank = 1'b0;
    wait_loaded(4);
    check_bank(1, 3);
    sm_bank = 1'b1;
    wait_loaded(5);
    check_bank(0, 4);
    check(done, "done after NUM_CHUNKS chunks");
    sm_bank = 1'b0;
    repeat (60) @(posedge clk);
    #1 check(n_cmds == 5 && beats == 5 * BW, $sformatf("no transfer after the last chunk (%0d cmds)", n_cmds));
    check(cmd_log.size() == 5, "five DMA commands");
    foreach (cmd_log[i])
      check(cmd_log[i] == BASE + 32'(i * BW * 16), $sformatf("DMA address of chunk %0d = %h", i, cmd_log[i]));
    // restart, then abort in the middle of a transfer
    @(posedge clk); #1 start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    repeat (8) @(posedge clk);
    #1 abort = 1'b1;
    @(posedge clk); #1 abort = 1'b0;
    check(!loading && !done, "abort returns to idle");
    repeat (30) @(posedge clk);
    #1 check(n_cmds == 6 && !loading, "no new transfer after abort");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
