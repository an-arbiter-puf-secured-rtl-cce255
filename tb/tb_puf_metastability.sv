// tb_puf_metastability: the repeated-measurement experiment behind the table
// of "fraction of ones" and the noise figure N. Three chips share one
// configuration: A (reference), B and C. The m-challenges are picked from the
// delay model of chip A (|predicted difference| below 0.03 of its spread).
// Each chip measures the same 100 m-challenges REPS times on PUF 0.
// For every challenge and chip the testbench reports the fraction of ones f.
// It then reports the number of metastable bits (f strictly between 0 and 1)
// and the noise N = sum(2 f (1-f)) / (number of metastable bits).
//
// Checks:
//   * a response whose modelled delay difference is larger than the largest
//     possible accumulated jitter never flips;
//   * metastable bits occur on the reference chip;
//   * at least as many occur there as on chips B and C.
// The slot is shortened to 100 cycles (40 enable) to keep the run short; the
// chain settles in about 10 cycles.
`timescale 1ps/1fs
module tb_puf_metastability;
  localparam int unsigned NS = 64, NM = 100, REPS = 40, T_RESP = 100;
  localparam logic [31:0] LAYOUT = 32'h0000_0001;
  localparam logic [31:0] CH_SEED [3] = '{32'h0000_00a0, 32'h0000_00b0, 32'h0000_00c0};
  localparam longint MARGIN_FS = 2 * (NS + 2) * puf_pkg::JITTER_FS + 1000;

  logic clk = 0, rst_n = 0;
  logic ch_we = 0, start = 0;
  logic [6:0] ch_addr = '0;
  logic [NS-1:0] ch_wdata = '0;
  logic [2:0] busy, done, err, match_valid, accept;
  logic [NM-1:0] fp [3];
  logic [6:0] hd [3];
  int ones [3][NM];
  int checks = 0, failures = 0;

  always #5000 clk = ~clk;

  for (genvar i = 0; i < 3; i++) begin : g_chip
    puf_auth_top #(.LAYOUT_SEED(LAYOUT), .CHIP_SEED(CH_SEED[i]), .T_RESP_CYC(T_RESP),
                   .EVAL_CYC(40)) dut (
      .clk(clk), .rst_n(rst_n), .dc(1'b0), .ch_we(ch_we), .ch_addr(ch_addr), .ch_wdata(ch_wdata),
      .start(start), .puf_sel(4'd0), .busy(busy[i]), .done(done[i]), .err(err[i]),
      .fingerprint(fp[i]), .template_fp('0), .match_valid(match_valid[i]), .hd(hd[i]),
      .accept(accept[i]));
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin : watchdog
    repeat (REPS * (NM * T_RESP + 20) + 10_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] mch [$];
    int n_meta [3];
    real noise [3];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    void'(puf_ref_pkg::select_mchallenges(LAYOUT, CH_SEED[0], NS, 0, NM, 0.2 / 6.78, mch));
    for (int k = 0; k < NM; k++) begin
      @(negedge clk);
      ch_we = 1'b1; ch_addr = 7'(k); ch_wdata = mch[k];
    end
    @(negedge clk);
    ch_we = 1'b0;
    for (int i = 0; i < 3; i++) for (int k = 0; k < NM; k++) ones[i][k] = 0;
    for (int rep = 0; rep < REPS; rep++) begin
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      wait (done[0]);
      @(negedge clk);
      check(err == '0, "no missing ready");
      for (int i = 0; i < 3; i++) for (int k = 0; k < NM; k++) ones[i][k] += int'(fp[i][k]);
    end
    $display("challenge            f(A)    f(B)    f(C)");
    for (int k = 0; k < 10; k++)
      $display("%20d  %5.1f%%  %5.1f%%  %5.1f%%", mch[k], 100.0 * ones[0][k] / REPS,
               100.0 * ones[1][k] / REPS, 100.0 * ones[2][k] / REPS);
    for (int i = 0; i < 3; i++) begin
      n_meta[i] = 0;
      noise[i] = 0.0;
      for (int k = 0; k < NM; k++) begin
        real f;
        longint d;
        f = real'(ones[i][k]) / REPS;
        if (ones[i][k] != 0 && ones[i][k] != REPS) begin
          n_meta[i]++;
          noise[i] += 2.0 * f * (1.0 - f);
        end
        d = puf_ref_pkg::delta_fs(LAYOUT, CH_SEED[i], NS, 0, mch[k]);
        if (d > MARGIN_FS || d < -MARGIN_FS)
          check(ones[i][k] == ((d > 0) ? REPS : 0),
                $sformatf("chip %0d challenge %0d: %0d ones of %0d, model delta %0d fs",
                          i, k, ones[i][k], REPS, d));
      end
      $display("chip %s: %0d metastable of %0d m-challenges, N = %0.2f%%", (i == 0) ? "A" :
               (i == 1) ? "B" : "C", n_meta[i], NM, (n_meta[i] > 0) ? 100.0 * noise[i] / n_meta[i] : 0.0);
    end
    check(n_meta[0] > 0, "metastable m-challenges on the reference chip");
    check(n_meta[0] >= n_meta[1] && n_meta[0] >= n_meta[2],
          "the reference chip has the most metastable m-challenges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
