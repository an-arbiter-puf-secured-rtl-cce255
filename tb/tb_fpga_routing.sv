// tb_fpga_routing: checks the transport delay of each net of the routing
// model to the femtosecond (no jitter), that a jittered delay stays within
// its range, that nets do not disturb each other, and that a pulse shorter
// than the delay still passes (transport delay).
`timescale 1ps/1fs
module tb_fpga_routing;
  localparam int unsigned N = 4;
  localparam int unsigned J = 10_000;      // 10 ps
  int unsigned d [N] = '{1_234_567, 250_000, 3_000_001, 777_777};
  logic [N-1:0] in0 = '0, out0, in1 = '0, out1;
  int checks = 0, failures = 0;

  fpga_routing #(.N_NETS(N), .JITTER_FS(0)) u0 (.delay_fs(d), .in(in0), .out(out0));
  fpga_routing #(.N_NETS(N), .JITTER_FS(J)) u1 (.delay_fs(d), .in(in1), .out(out1));

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin : watchdog
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100;
    for (int k = 0; k < 40; k++) begin
      int n;
      logic v;
      n = k % N;
      v = ~in0[n];
      in0[n] = v;
      in1[n] = v;
      #(real'(d[n]) / 1000.0 - 0.001);
      check(out0[n] != v, $sformatf("edge %0d on net %0d early", k, n));
      check(out1[n] != v, $sformatf("jittered edge %0d on net %0d early", k, n));
      #0.002;
      check(out0[n] == v, $sformatf("edge %0d on net %0d not arrived at its delay", k, n));
      #(real'(J) / 1000.0);
      check(out1[n] == v, $sformatf("jittered edge %0d on net %0d later than delay+jitter", k, n));
      check(out0 == in0 && out1 == in1, "other nets undisturbed");
      #($urandom_range(3000, 2000));
    end
    // all inputs are low again here; a 0.3 ps pulse on net 1 while the other
    // three nets carry rising edges
    in0 = '1;
    #(0.3);
    in0[1] = 1'b0;
    #(real'(d[1]) / 1000.0 - 0.3 + 0.1);
    check(out0 == 4'b0010, $sformatf("short pulse arrived: out=%b", out0));
    #(0.3);
    check(out0 == 4'b0000, $sformatf("short pulse ended: out=%b", out0));
    #4000;
    check(out0 == 4'b1101, $sformatf("all edges settled: out=%b", out0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
