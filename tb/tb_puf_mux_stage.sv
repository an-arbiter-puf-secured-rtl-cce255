// tb_puf_mux_stage: exhaustive check of one crossed-multiplexer stage over all
// 64 combinations of c, dc and the four input copies.
`timescale 1ps/1fs
module tb_puf_mux_stage;
  logic c, dc, au, bu, al, bl, ao, bo;
  int checks = 0, failures = 0;

  puf_mux_stage dut (.c(c), .dc(dc), .above_u(au), .below_u(bu), .above_l(al),
                     .below_l(bl), .above_o(ao), .below_o(bo));

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      logic exp_a, exp_b;
      {c, dc, au, bu, al, bl} = 6'(v);
      #10;
      // straight only when both the challenge bit and dc are 0
      if (!c && !dc) begin exp_a = au; exp_b = bl; end
      else           begin exp_a = bu; exp_b = al; end
      checks += 2;
      if (ao !== exp_a) begin failures++; $display("FAIL v=%0d above_o=%0b exp %0b", v, ao, exp_a); end
      if (bo !== exp_b) begin failures++; $display("FAIL v=%0d below_o=%0b exp %0b", v, bo, exp_b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
