// tb_puf_arbiter: drives edge sequences onto the latch arbiter and checks
// that r reports the path whose rising edge came first, holds it while the
// lower path stays high and clears when the lower path falls.
`timescale 1ps/1fs
module tb_puf_arbiter;
  logic above, below, r;
  int checks = 0, failures = 0;

  puf_arbiter dut (.above(above), .below(below), .r(r));

  task automatic expect_r(logic e, string what);
    #1;
    checks++;
    if (r !== e) begin
      failures++;
      $display("FAIL %s: r=%0b expected %0b", what, r, e);
    end
  endtask

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    above = 0; below = 0;
    expect_r(0, "idle");
    for (int k = 0; k < 50; k++) begin
      int unsigned gap;
      gap = $urandom_range(200, 1);
      // lower edge first -> 1
      below = 1; expect_r(1, "lower first, lower high");
      #(gap); above = 1; expect_r(1, "lower first, both high");
      above = 0; expect_r(1, "lower first, upper dropped");
      above = 1;
      below = 0; expect_r(0, "lower falls");
      above = 0; expect_r(0, "both low");
      // upper edge first -> 0
      above = 1; expect_r(0, "upper first, upper high");
      #(gap); below = 1; expect_r(0, "upper first, both high");
      below = 0; expect_r(0, "upper first, lower falls first");
      above = 0; expect_r(0, "both low again");
      // a lower path that is high alone sets r at any time, even after a
      // measurement in which the upper edge won
      above = 1; below = 1; expect_r(0, "both high, upper won");
      above = 0; expect_r(1, "upper falls first while lower high");
      below = 0; expect_r(0, "lower falls");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
