// arbiter_puf: one 64-stage multiplexer arbiter PUF whose LUTs sit at random
// sites of the FPGA region. It follows the published VHDL entity Arbiter_PUF:
// ports c, enable, dc, ready and r.
//
// How it works. Raising enable launches a rising edge on the upper ("above")
// and lower ("below") signal together. The two edges pass a first stage whose
// select is tied to 0 (the VHDL's c0), then 64 stages of crossed multiplexer
// pairs (puf_mux_stage). Challenge bit c[i] sets stage i+1 straight (0) or
// crossed (1). At the end a latch arbiter (puf_arbiter) sets r = 1 if the lower
// edge arrives first and leaves r = 0 if the upper edge does. Dropping enable
// sends falling edges down the chain, which clear r and ready.
//
// Where the delay comes from. Every connection between two LUTs is a routed net
// (fpga_routing): four per stage, since each source feeds both LUTs of the
// next stage, and two into the arbiter. The delay of each net comes from
// puf_pkg::net_delay_fs. It depends on where the configuration (LAYOUT_SEED)
// put the two LUTs, which is the routing-induced part, and on the chip
// (CHIP_SEED), which is the manufacturing part. PUF_INDEX picks which block of
// LUT numbers of the configuration this PUF uses, so the PUFs of one
// configuration never share a LUT.
//
// Ready. In the VHDL, ready is raised after "wait on r", which never fires when
// the upper edge wins and r stays 0. Here ready is instead enable AND both
// arbiter inputs high: it rises once both edges have reached the arbiter, when r
// can no longer change, whichever edge won.
//
// Timing: asynchronous. Both r and ready settle about one chain delay after
// enable rises (tens of ns with the default delay model) and must be
// synchronised by the reader. Keep enable low for at least one chain delay
// between measurements so the falling edges have cleared the chain.
// The chain, the arbiter and the launch are synthesizable; the net delays are
// a simulation model of the fabric routing.
`timescale 1ps/1fs
module arbiter_puf #(
  parameter int unsigned N_STAGES    = puf_pkg::N_STAGES,
  parameter logic [31:0] LAYOUT_SEED = 32'h0000_0001,
  parameter logic [31:0] CHIP_SEED   = 32'h0000_00b0,
  parameter int unsigned PUF_INDEX   = 0,
  parameter int unsigned JITTER_FS   = puf_pkg::JITTER_FS
) (
  input  logic [N_STAGES-1:0] c,       // challenge
  input  logic                enable,  // launch (1) / reset (0)
  input  logic                dc,      // LUT don't-care input, keep 0
  output logic                ready,   // both edges have reached the arbiter
  output logic                r        // response
);
  localparam int unsigned NNETS = puf_pkg::nets_per_puf(N_STAGES);

  // Launch: both paths start from enable, as in the VHDL enable process.
  logic above, below;
  assign above = enable;
  assign below = enable;

  // Stage s outputs, s = 0 .. N_STAGES.
  logic [N_STAGES:0] above_s, below_s;
  // Routed nets: net 4s+q feeds stage s (see puf_pkg::net_src), the last two
  // feed the arbiter.
  logic [NNETS-1:0] net_in, net_out;
  int unsigned      net_dly [NNETS];
  logic arb_above, arb_below;

  for (genvar n = 0; n < NNETS; n++) begin : g_dly
    localparam int unsigned D = puf_pkg::net_delay_fs(LAYOUT_SEED, CHIP_SEED, N_STAGES, PUF_INDEX, n);
    assign net_dly[n] = D;
  end

  for (genvar s = 0; s <= N_STAGES; s++) begin : g_stage
    logic src_above, src_below, sel;
    if (s == 0) begin : g_first
      assign src_above = above;
      assign src_below = below;
      assign sel       = 1'b0;       // the VHDL's c0, tied straight
    end else begin : g_next
      assign src_above = above_s[s-1];
      assign src_below = below_s[s-1];
      assign sel       = c[s-1];
    end
    assign net_in[4*s+0] = src_above;  // to upper LUT, straight
    assign net_in[4*s+1] = src_below;  // to upper LUT, crossed
    assign net_in[4*s+2] = src_above;  // to lower LUT, crossed
    assign net_in[4*s+3] = src_below;  // to lower LUT, straight

    puf_mux_stage u_mux (
      .c      (sel),
      .dc     (dc),
      .above_u(net_out[4*s+0]),
      .below_u(net_out[4*s+1]),
      .above_l(net_out[4*s+2]),
      .below_l(net_out[4*s+3]),
      .above_o(above_s[s]),
      .below_o(below_s[s])
    );
  end

  assign net_in[NNETS-2] = above_s[N_STAGES];
  assign net_in[NNETS-1] = below_s[N_STAGES];
  assign arb_above = net_out[NNETS-2];
  assign arb_below = net_out[NNETS-1];

  fpga_routing #(.N_NETS(NNETS), .JITTER_FS(JITTER_FS)) u_routing (
    .delay_fs(net_dly),
    .in      (net_in),
    .out     (net_out)
  );

  puf_arbiter u_arbiter (
    .above(arb_above),
    .below(arb_below),
    .r    (r)
  );

  assign ready = enable & arb_above & arb_below;
endmodule
