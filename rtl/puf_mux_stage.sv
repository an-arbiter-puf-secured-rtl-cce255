// puf_mux_stage: one delay stage of the arbiter PUF, a pair of LUT
// multiplexers.
//
// With challenge bit c = 0 the upper input goes to the upper output and the
// lower input to the lower output. With c = 1 the two paths cross. The extra
// LUT input dc ("don't care") also selects the crossed setting when it is 1.
// This follows the published VHDL: "above1 <= above0 when (c(0)='0' and dc='0')
// else below0". There it keeps the synthesis tool from reducing each LUT to a
// wire or an inverter. Each output is one LUT with three inputs (own path,
// other path, c/dc), so a placement tool can put the two halves of a stage on
// any two LUT sites.
//
// Interface: c, dc; above_u/below_u are the copies of the upper and lower
// signals routed to the upper LUT, above_l/below_l the copies routed to the
// lower LUT. Each copy comes over its own net, with its own delay. Outputs are
// above_o and below_o. Purely combinational: all propagation delay of the PUF
// sits in the routed nets between stages (fpga_routing), so this module adds
// none.
`timescale 1ps/1fs
module puf_mux_stage (
  input  logic c,
  input  logic dc,
  input  logic above_u,
  input  logic below_u,
  input  logic above_l,
  input  logic below_l,
  output logic above_o,
  output logic below_o
);
  logic straight;

  always_comb begin
    straight = (c == 1'b0) && (dc == 1'b0);
    above_o  = straight ? above_u : below_u;
    below_o  = straight ? below_l : above_l;
  end
endmodule
