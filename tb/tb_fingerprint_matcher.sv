// tb_fingerprint_matcher: random templates with a chosen number of flipped
// bits (0..100, with the threshold 12/13 boundary hit often). Checks the
// Hamming distance, the accept decision (distance <= 12) and the one-cycle
// latency of valid_out.
`timescale 1ps/1fs
module tb_fingerprint_matcher;
  localparam int unsigned N = 100, T = 12;
  logic clk = 0, rst_n = 0, valid_in = 0;
  logic [N-1:0] tmpl = '0, fp = '0;
  logic valid_out, accept;
  logic [6:0] hd;
  int checks = 0, failures = 0, n_acc = 0, n_rej = 0;

  always #5000 clk = ~clk;

  fingerprint_matcher dut (.clk(clk), .rst_n(rst_n), .valid_in(valid_in), .template_fp(tmpl),
                           .fingerprint(fp), .valid_out(valid_out), .hd(hd), .accept(accept));

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 2000; it++) begin
      int k, flipped;
      logic [N-1:0] m;
      k = (it % 4 == 0) ? int'($urandom_range(N, 0)) : int'($urandom_range(T + 2, T - 2));
      // flip exactly k distinct bits
      m = '0; flipped = 0;
      while (flipped < k) begin
        int p;
        p = int'($urandom_range(N - 1, 0));
        if (!m[p]) begin m[p] = 1'b1; flipped++; end
      end
      tmpl = {$urandom(), $urandom(), $urandom(), $urandom()};
      fp = tmpl ^ m;
      valid_in = 1'b1;
      @(negedge clk);
      valid_in = 1'b0;
      check(valid_out, "valid_out one cycle after valid_in");
      check(hd == 7'(k), $sformatf("hd=%0d expected %0d", hd, k));
      check(accept == (k <= T), $sformatf("accept=%0b for hd %0d", accept, k));
      if (accept) n_acc++; else n_rej++;
      @(negedge clk);
      check(!valid_out, "valid_out is a single pulse");
    end
    check(n_acc > 0 && n_rej > 0, "both decisions seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
