// puf_arbiter: the arbiter that decides which racing edge came first, built
// as a single-LUT set/reset latch rather than a flip-flop.
//
// Function, taken from the published VHDL:
//     r <= (below and not above) or (below and r)
// While 'below' is low, r is cleared. If 'below' rises while 'above' is still
// low, r is set and then holds for as long as 'below' stays high, whatever
// 'above' does. If 'above' rose first, r stays 0. So after both rising edges
// have arrived, r = 1 means the lower path won and r = 0 means the upper path
// won. The falling edges at the end of a measurement clear r again.
// The prose of the paper gives the LUT function as "(U AND L) OR (U AND R)".
// That expression does not arbitrate, and it conflicts with the VHDL listing,
// so the VHDL is followed here.
//
// Interface: above, below (the two paths at the end of the chain) -> r.
// Asynchronous: r changes as soon as its inputs do; the reader must wait until
// both edges have arrived (see arbiter_puf's ready) and synchronise r.
//
// This module is a latch on purpose; the combinational loop of the LUT
// implementation is written as always_latch.
`timescale 1ps/1fs
module puf_arbiter (
  input  logic above,
  input  logic below,
  output logic r
);
  always_latch begin
    if (!below)      r = 1'b0;
    else if (!above) r = 1'b1;
  end
endmodule
