// tb_puf_auth_top: end-to-end authentication rounds with three chips of the
// same configuration and one chip of another configuration.
//
//   chip A  reference chip (the server's model is built from it)
//   chip B  the chip being enrolled and later verified
//   chip C  another chip with the same configuration (an impostor)
//   chip D  chip B's silicon with a different configuration (a different
//           "second challenge")
//
// For each of the ten PUFs the server picks 100 m-challenges from its model of
// chip A. All four chips are then measured twice. Round 1 enrols chip B: its
// fingerprint becomes the template. In round 2 every chip's fingerprint is
// matched against that template. Checks: chip B is accepted and chips C and D
// are rejected. Every response whose modelled delay difference is outside the
// jitter range equals the model. hd equals the bit count. start-to-done takes
// 1 + 100*1000 cycles. err never rises. The mechanisms counted are accept,
// reject, a layout change causing rejection, and metastable bits that flip
// between the two rounds on the reference chip (jitter at work). A mechanism
// that never occurs counts as a failure.
`timescale 1ps/1fs
module tb_puf_auth_top;
  localparam int unsigned NP = 10, NS = 64, NM = 100, T_RESP = 1000;
  localparam logic [31:0] LAYOUT  = 32'h0000_0001;
  localparam logic [31:0] LAYOUT2 = 32'h0bad_cafe;
  localparam logic [31:0] CHIP_A = 32'h0000_00a0, CHIP_B = 32'h0000_00b0, CHIP_C = 32'h0000_00c0;
  localparam int NC = 4;
  localparam longint MARGIN_FS = 2 * (NS + 2) * puf_pkg::JITTER_FS + 1000;

  logic clk = 0, rst_n = 0, dc = 0;
  logic ch_we = 0, start = 0;
  logic [6:0] ch_addr = '0;
  logic [NS-1:0] ch_wdata = '0;
  logic [3:0] puf_sel = '0;
  logic [NM-1:0] template_fp = '0;
  logic [NC-1:0] busy, done, err, match_valid, accept;
  logic [NM-1:0] fp [NC];
  logic [6:0]    hd [NC];

  localparam logic [31:0] CH_SEED [NC] = '{CHIP_A, CHIP_B, CHIP_C, CHIP_B};
  localparam logic [31:0] LY_SEED [NC] = '{LAYOUT, LAYOUT, LAYOUT, LAYOUT2};

  int checks = 0, failures = 0;
  int n_accept = 0, n_reject = 0, n_layout_reject = 0, n_meta_flips = 0;
  int hd_bb = 0, hd_bc = 0, ones_b = 0, n_cmp = 0;

  always #5000 clk = ~clk;

  for (genvar i = 0; i < NC; i++) begin : g_chip
    puf_auth_top #(.LAYOUT_SEED(LY_SEED[i]), .CHIP_SEED(CH_SEED[i])) dut (
      .clk(clk), .rst_n(rst_n), .dc(dc), .ch_we(ch_we), .ch_addr(ch_addr), .ch_wdata(ch_wdata),
      .start(start), .puf_sel(puf_sel), .busy(busy[i]), .done(done[i]), .err(err[i]),
      .fingerprint(fp[i]), .template_fp(template_fp), .match_valid(match_valid[i]),
      .hd(hd[i]), .accept(accept[i]));
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  // one measurement on all chips; returns when every match result is out
  task automatic measure_all(int p);
    int cyc;
    @(negedge clk);
    puf_sel = 4'(p);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done[0] && cyc < NM * T_RESP + 100) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 1 + NM * T_RESP, $sformatf("start-to-done %0d cycles", cyc));
    check(done == '1, "all chips done together");
    @(negedge clk);
    check(match_valid == '1, "match result one cycle after done");
    check(err == '0, "no missing ready");
  endtask

  initial begin : watchdog
    repeat (NP * 2 * (NM * T_RESP + 200) + 10_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] mch [$];
    logic [NM-1:0] round1 [NC];
    int tries;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < NP; p++) begin
      tries = puf_ref_pkg::select_mchallenges(LAYOUT, CHIP_A, NS, p, NM, 0.2 / 6.78, mch);
      for (int k = 0; k < NM; k++) begin
        @(negedge clk);
        ch_we = 1'b1; ch_addr = 7'(k); ch_wdata = mch[k];
      end
      @(negedge clk);
      ch_we = 1'b0;
      // round 1: enrolment
      template_fp = '0;
      measure_all(p);
      for (int i = 0; i < NC; i++) round1[i] = fp[i];
      // round 2: verification against chip B's template
      template_fp = round1[1];
      measure_all(p);
      for (int i = 0; i < NC; i++) begin
        int exp_hd;
        exp_hd = puf_ref_pkg::popcount100(fp[i] ^ round1[1]);
        check(int'(hd[i]) == exp_hd, $sformatf("puf %0d chip %0d hd %0d expected %0d", p, i, hd[i], exp_hd));
        // responses against the delay model
        for (int k = 0; k < NM; k++) begin
          longint d;
          d = puf_ref_pkg::delta_fs(LY_SEED[i], CH_SEED[i], NS, p, mch[k]);
          if (d > MARGIN_FS || d < -MARGIN_FS) begin
            check(fp[i][k] == (d > 0) && round1[i][k] == (d > 0),
                  $sformatf("puf %0d chip %0d bit %0d = %0b/%0b, model delta %0d fs",
                            p, i, k, round1[i][k], fp[i][k], d));
          end
        end
      end
      check(accept[1], $sformatf("puf %0d: enrolled chip B accepted (hd %0d)", p, hd[1]));
      check(!accept[2], $sformatf("puf %0d: chip C rejected (hd %0d)", p, hd[2]));
      check(!accept[3], $sformatf("puf %0d: other layout rejected (hd %0d)", p, hd[3]));
      if (accept[1]) n_accept++;
      n_reject += int'(!accept[0]) + int'(!accept[2]) + int'(!accept[3]);
      if (!accept[3]) n_layout_reject++;
      n_meta_flips += puf_ref_pkg::popcount100(fp[0] ^ round1[0]);
      hd_bb += int'(hd[1]);
      hd_bc += int'(hd[2]);
      ones_b += puf_ref_pkg::popcount100(fp[1]);
      n_cmp++;
      $display("puf %0d: %0d candidates for 100 m-challenges; hd A-B %0d, B-B %0d, C-B %0d, D-B %0d, A-A %0d",
               p, tries, hd[0], hd[1], hd[2], hd[3], puf_ref_pkg::popcount100(fp[0] ^ round1[0]));
    end
    $display("mean hd B-B %0.2f, B-C %0.2f; ones in B fingerprints %0.1f%%",
             real'(hd_bb) / n_cmp, real'(hd_bc) / n_cmp, 100.0 * ones_b / (n_cmp * NM));
    $display("mechanisms: accept %0d, reject %0d, layout-change reject %0d, metastable flips on reference chip %0d",
             n_accept, n_reject, n_layout_reject, n_meta_flips);
    check(n_accept > 0, "accept happened");
    check(n_reject > 0, "reject happened");
    check(n_layout_reject > 0, "layout change caused rejection");
    check(n_meta_flips > 0, "metastable bits flipped on the reference chip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
