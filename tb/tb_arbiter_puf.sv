// tb_arbiter_puf: applies random challenges to full 64-stage arbiter PUFs
// and compares each response and the moment ready rises with the reference
// model (puf_ref_pkg), which sums the net delays along both paths. It also
// checks the dc input (all stages crossed) and the reset when enable drops.
// Two instances with different configuration, PUF position and chip are tested.
// Jitter is off so that every outcome is exact.
`timescale 1ps/1fs
module tb_arbiter_puf;
  localparam int unsigned N = 64;
  localparam logic [31:0] LAY  [2] = '{32'h0000_0001, 32'h1234_5678};
  localparam logic [31:0] CHIP [2] = '{32'h0000_00b0, 32'h0000_00c0};
  localparam int unsigned PIDX [2] = '{0, 9};

  logic [N-1:0] c;
  logic         dc;
  logic [1:0]   en, ready, r;
  realtime      t_ready [2];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 2; i++) begin : g_dut
    arbiter_puf #(.N_STAGES(N), .LAYOUT_SEED(LAY[i]), .CHIP_SEED(CHIP[i]),
                  .PUF_INDEX(PIDX[i]), .JITTER_FS(0))
      dut (.c(c), .enable(en[i]), .dc(dc), .ready(ready[i]), .r(r[i]));
    always @(posedge ready[i]) t_ready[i] = $realtime;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic measure(int i, logic [N-1:0] ch, bit dcv, output int skipped);
    puf_ref_pkg::arrival_t a;
    realtime t0;
    longint tmax;
    a = puf_ref_pkg::arrival(LAY[i], CHIP[i], N, PIDX[i], 64'(ch), dcv);
    skipped = (a.t_above == a.t_below);
    c = ch; dc = dcv;
    #1000;
    en[i] = 1'b1;
    t0 = $realtime;
    #1;
    check(ready[i] == 1'b0 && r[i] == 1'b0, "ready/r low right after launch");
    #200_000;
    check(ready[i] == 1'b1, $sformatf("ready high after 200 ns (puf %0d)", i));
    tmax = (a.t_above > a.t_below) ? a.t_above : a.t_below;
    check((t_ready[i] - t0) * 1000.0 > real'(tmax) - 0.5 && (t_ready[i] - t0) * 1000.0 < real'(tmax) + 0.5,
          $sformatf("ready at %f ps, model %f ps", t_ready[i] - t0, real'(tmax) / 1000.0));
    if (!skipped)
      check(r[i] == (a.t_below < a.t_above),
            $sformatf("puf %0d c=%h dc=%0b r=%0b model dA-dB=%0d fs", i, ch, dcv, r[i],
                      a.t_above - a.t_below));
    en[i] = 1'b0;
    #1;
    check(ready[i] == 1'b0, "ready drops with enable");
    #200_000;
    check(r[i] == 1'b0, "r cleared after falling edges");
  endtask

  initial begin : watchdog
    #1_000_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int skipped, ones;
    en = '0; c = '0; dc = 1'b0;
    #10_000;
    for (int i = 0; i < 2; i++) begin
      ones = 0;
      for (int k = 0; k < 150; k++) begin
        logic [N-1:0] ch;
        ch = N'(puf_ref_pkg::rand64());
        measure(i, ch, 1'b0, skipped);
        ones += r[i];
      end
      measure(i, '0, 1'b1, skipped);      // dc forces every stage crossed
      measure(i, '1, 1'b0, skipped);
      measure(i, '0, 1'b0, skipped);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
