// fpga_routing: behavioural model (not synthesizable) of the routed nets of
// the FPGA fabric that connect the LUTs of one arbiter PUF.
//
// Almost all delay of an FPGA arbiter PUF comes from routing through the
// programmable switch matrix. This model forwards each of its N_NETS inputs
// to the matching output after that net's delay_fs[n] femtoseconds. Each
// transition also gets a fresh random jitter of 0..JITTER_FS fs. The jitter
// stands for the thermal noise that makes nearly balanced challenges
// metastable. The delay is transport: every edge is forwarded on its own, even
// if edges follow closer than the delay. The PUF sends one rising and one
// falling edge per measurement, microseconds apart, so transport and inertial
// delay behave alike here.
//
// All nets of a PUF live in one process, and the delays arrive as a constant
// input array rather than parameters. This keeps a design with thousands of
// nets cheap to compile.
//
// Interface: delay_fs[n] (constant, from puf_pkg::net_delay_fs), in[n] -> out[n].
// Parameters N_NETS, JITTER_FS. All outputs start at 0.
`timescale 1ps/1fs
module fpga_routing #(
  parameter int unsigned N_NETS    = 4,
  parameter int unsigned JITTER_FS = 0
) (
  input  int unsigned       delay_fs [N_NETS],
  input  logic [N_NETS-1:0] in,
  output logic [N_NETS-1:0] out
);
  logic [N_NETS-1:0] seen;

  initial begin
    out  = '0;
    seen = '0;
  end

  always @(in) begin : transport
    for (int i = 0; i < N_NETS; i++) begin
      if (in[i] != seen[i]) begin
        automatic int  k  = i;
        automatic logic v = in[i];
        automatic real dd = real'(delay_fs[i]
                                  + ((JITTER_FS > 0) ? $urandom_range(JITTER_FS, 0) : 0)) / 1000.0;
        fork
          begin
            #(dd) out[k] = v;
          end
        join_none
      end
    end
    seen = in;
  end
endmodule
