// tb_fingerprint_sequencer: drives the sequencer at its default sizes (10
// PUFs, 100 challenges of 64 bits, 1000-cycle slots) against simple PUF
// stand-ins. PUF j answers with the parity of (challenge AND mask_j), and
// raises ready 35 ns after its enable. The checks are the fingerprint bits,
// the start-to-done cycle count, the enable pulse length, that only the
// selected PUF is ever enabled, and err for a PUF that never becomes ready.
`timescale 1ps/1fs
module tb_fingerprint_sequencer;
  localparam int unsigned NP = 10, NS = 64, NM = 100;
  localparam int unsigned T_RESP = 1000, SETUP = 4, EVAL = 500;
  localparam int unsigned DEAD = 7;        // this stand-in never raises ready

  logic clk = 0, rst_n = 0;
  logic ch_we = 0, start = 0;
  logic [6:0] ch_addr = '0;
  logic [NS-1:0] ch_wdata = '0;
  logic [3:0] puf_sel = '0;
  logic busy, done, err;
  logic [NM-1:0] fingerprint;
  logic [NS-1:0] puf_c;
  logic [NP-1:0] puf_en, puf_ready, puf_r;

  logic [NS-1:0] chal [NM];
  logic [NS-1:0] mask [NP];
  int checks = 0, failures = 0;
  int en_cycles [NP];
  int pulse_len, max_pulse, min_pulse;

  always #5000 clk = ~clk;   // 100 MHz

  fingerprint_sequencer dut (
    .clk(clk), .rst_n(rst_n), .ch_we(ch_we), .ch_addr(ch_addr), .ch_wdata(ch_wdata),
    .start(start), .puf_sel(puf_sel), .busy(busy), .done(done), .err(err),
    .fingerprint(fingerprint), .puf_c(puf_c), .puf_en(puf_en), .puf_ready(puf_ready),
    .puf_r(puf_r));

  // PUF stand-ins
  for (genvar j = 0; j < NP; j++) begin : g_puf
    always @(puf_en[j]) begin
      if (puf_en[j]) begin
        #35_000;
        if (puf_en[j] && j != DEAD) begin
          puf_r[j]     = ^(puf_c & mask[j]);
          puf_ready[j] = 1'b1;
        end
      end else begin
        puf_r[j]     = 1'b0;
        puf_ready[j] = 1'b0;
      end
    end
  end

  // enable bookkeeping
  always @(posedge clk) begin
    for (int j = 0; j < NP; j++) if (puf_en[j]) en_cycles[j]++;
    if (|puf_en) pulse_len++;
    else if (pulse_len != 0) begin
      if (pulse_len > max_pulse) max_pulse = pulse_len;
      if (pulse_len < min_pulse) min_pulse = pulse_len;
      pulse_len = 0;
    end
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic run(int sel, bit expect_err);
    int cyc;
    logic [NM-1:0] expv;
    for (int j = 0; j < NP; j++) en_cycles[j] = 0;
    max_pulse = 0; min_pulse = 1 << 30; pulse_len = 0;
    @(negedge clk);
    puf_sel = 4'(sel);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    check(busy, "busy after start");
    while (!done && cyc < NM * T_RESP + 100) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 1 + NM * T_RESP, $sformatf("start-to-done %0d cycles, expected %0d", cyc, 1 + NM * T_RESP));
    @(negedge clk);
    check(!busy, "idle after done");
    check(err == expect_err, $sformatf("err=%0b expected %0b (puf %0d)", err, expect_err, sel));
    if (!expect_err) begin
      for (int k = 0; k < NM; k++) expv[k] = ^(chal[k] & mask[sel]);
      check(fingerprint == expv, $sformatf("fingerprint of puf %0d: %h expected %h", sel, fingerprint, expv));
    end
    for (int j = 0; j < NP; j++)
      check(en_cycles[j] == ((j == sel) ? NM * EVAL : 0),
            $sformatf("puf %0d enabled %0d cycles", j, en_cycles[j]));
    check(max_pulse == EVAL && min_pulse == EVAL, $sformatf("enable pulse %0d..%0d cycles", min_pulse, max_pulse));
  endtask

  initial begin : watchdog
    repeat (5 * NM * T_RESP + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    puf_ready = '0; puf_r = '0;
    for (int j = 0; j < NP; j++) mask[j] = puf_ref_pkg::rand64();
    for (int k = 0; k < NM; k++) chal[k] = puf_ref_pkg::rand64();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NM; k++) begin
      @(negedge clk);
      ch_we = 1'b1; ch_addr = 7'(k); ch_wdata = chal[k];
    end
    @(negedge clk);
    ch_we = 1'b0;
    run(2, 1'b0);
    run(9, 1'b0);
    // writes while busy are ignored
    fork
      run(0, 1'b0);
      begin
        repeat (20) @(negedge clk);
        ch_we = 1'b1; ch_addr = 7'd0; ch_wdata = ~chal[0];
        @(negedge clk);
        ch_we = 1'b0;
      end
    join
    run(DEAD, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
