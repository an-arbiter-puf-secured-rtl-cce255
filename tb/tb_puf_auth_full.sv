// tb_puf_auth_full: one complete authentication session on the design at its
// default size: one configuration of ten 64-stage PUFs, 100 m-challenges per
// fingerprint, 1000-cycle response slots at 100 MHz. The chip is the default
// CHIP_SEED. For each PUF the server picks m-challenges from its model of a
// reference chip, enrols the chip (first fingerprint becomes the template) and
// verifies it (second fingerprint is matched). The checks: the chip is
// accepted; a template predicted for another chip is rejected; every response
// outside the jitter range equals the delay model; each fingerprint takes
// 1 + 100*1000 cycles (1 ms, the published 10 us per response).
`timescale 1ps/1fs
module tb_puf_auth_full;
  localparam int unsigned NP = puf_pkg::N_PUFS, NS = puf_pkg::N_STAGES, NM = puf_pkg::N_MCHAL;
  localparam int unsigned T_RESP = 1000;
  localparam logic [31:0] LAYOUT = 32'h0000_0001;   // top default
  localparam logic [31:0] CHIP   = 32'h0000_00b0;   // top default
  localparam logic [31:0] REF_CHIP = 32'h0000_00a0, OTHER_CHIP = 32'h0000_00c0;
  localparam longint MARGIN_FS = 2 * (NS + 2) * puf_pkg::JITTER_FS + 1000;

  logic clk = 0, rst_n = 0, dc = 0;
  logic ch_we = 0, start = 0;
  logic [6:0] ch_addr = '0;
  logic [NS-1:0] ch_wdata = '0;
  logic [3:0] puf_sel = '0;
  logic [NM-1:0] template_fp = '0, fingerprint;
  logic busy, done, err, match_valid, accept;
  logic [6:0] hd;
  int checks = 0, failures = 0, n_accept = 0, n_reject = 0;

  always #5000 clk = ~clk;

  puf_auth_top dut (
    .clk(clk), .rst_n(rst_n), .dc(dc), .ch_we(ch_we), .ch_addr(ch_addr), .ch_wdata(ch_wdata),
    .start(start), .puf_sel(puf_sel), .busy(busy), .done(done), .err(err),
    .fingerprint(fingerprint), .template_fp(template_fp), .match_valid(match_valid),
    .hd(hd), .accept(accept));

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic measure(int p);
    int cyc;
    @(negedge clk);
    puf_sel = 4'(p);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < NM * T_RESP + 100) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 1 + NM * T_RESP, $sformatf("start-to-done %0d cycles", cyc));
    @(negedge clk);
    check(match_valid, "match result one cycle after done");
    check(!err, "no missing ready");
  endtask

  initial begin : watchdog
    repeat (NP * 2 * (NM * T_RESP + 200) + 10_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] mch [$];
    logic [NM-1:0] enrolled, predicted_other;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < NP; p++) begin
      void'(puf_ref_pkg::select_mchallenges(LAYOUT, REF_CHIP, NS, p, NM, 0.2 / 6.78, mch));
      for (int k = 0; k < NM; k++) begin
        @(negedge clk);
        ch_we = 1'b1; ch_addr = 7'(k); ch_wdata = mch[k];
        predicted_other[k] = puf_ref_pkg::delta_fs(LAYOUT, OTHER_CHIP, NS, p, mch[k]) > 0;
      end
      @(negedge clk);
      ch_we = 1'b0;
      // enrolment
      template_fp = predicted_other;
      measure(p);
      check(!accept, $sformatf("puf %0d: template of another chip rejected (hd %0d)", p, hd));
      n_reject += int'(!accept);
      enrolled = fingerprint;
      // verification
      template_fp = enrolled;
      measure(p);
      check(accept, $sformatf("puf %0d: enrolled chip accepted (hd %0d)", p, hd));
      n_accept += int'(accept);
      for (int k = 0; k < NM; k++) begin
        longint d;
        d = puf_ref_pkg::delta_fs(LAYOUT, CHIP, NS, p, mch[k]);
        if (d > MARGIN_FS || d < -MARGIN_FS)
          check(fingerprint[k] == (d > 0) && enrolled[k] == (d > 0),
                $sformatf("puf %0d bit %0d = %0b/%0b, model delta %0d fs", p, k, enrolled[k],
                          fingerprint[k], d));
      end
      $display("puf %0d: hd enrol-verify %0d", p, hd);
    end
    check(n_accept == NP && n_reject == NP, "every PUF accepted its own chip and rejected the other");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
