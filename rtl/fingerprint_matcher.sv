// fingerprint_matcher: the verifier's decision. It counts the bits in which
// a received fingerprint differs from the stored template (the Hamming
// distance) and accepts the chip if the count is at most THRESH.
//
// The published text says in two places that a chip passes if the distance is
// "smaller than" t. The formula it gives for the false-acceptance rate sums
// distances 0..t, and only that reading reproduces its figure of 2.4e-5 for
// t = 12, n = 100, p = 0.297. This block follows the formula: accept when
// hd <= THRESH.
//
// In the published system this comparison runs on the remote server, not on
// the chip, and the template is kept secret there. It is given as hardware here
// so that the complete authentication round can be simulated. The register
// interface is this design's choice.
//
// Interface: when valid_in is high, template and fingerprint are compared.
// One clock later valid_out is high for one cycle with hd and accept.
`timescale 1ps/1fs
module fingerprint_matcher #(
  parameter int unsigned N_BITS = puf_pkg::N_MCHAL,
  parameter int unsigned THRESH = puf_pkg::THRESH_T,
  localparam int unsigned HW = $clog2(N_BITS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid_in,
  input  logic [N_BITS-1:0] template_fp,
  input  logic [N_BITS-1:0] fingerprint,
  output logic              valid_out,
  output logic [HW-1:0]     hd,
  output logic              accept
);
  logic [N_BITS-1:0] diff;
  logic [HW-1:0]     count;

  always_comb begin
    diff  = template_fp ^ fingerprint;
    count = '0;
    for (int i = 0; i < N_BITS; i++) count = count + HW'(diff[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0;
      hd        <= '0;
      accept    <= 1'b0;
    end else begin
      valid_out <= valid_in;
      if (valid_in) begin
        hd     <= count;
        accept <= (count <= HW'(THRESH));
      end
    end
  end
endmodule
