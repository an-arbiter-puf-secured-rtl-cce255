// puf_auth_top: the PUF side and the verifier side of one authentication
// round with randomly reconfigured arbiter PUFs, wired together.
//
// Contents:
//   * N_PUFS arbiter_puf instances. Together they are one configuration of the
//     FPGA region (the "second challenge", here LAYOUT_SEED). Instance j uses
//     LUT numbers j*132 .. j*132+131 of the random placement, so no two share a
//     LUT. CHIP_SEED stands for the individual chip's manufacturing variation.
//   * one fingerprint_sequencer, which applies the m-challenges to the selected
//     PUF and collects the fingerprint;
//   * one fingerprint_matcher. It compares the fingerprint with a template
//     supplied on template_fp and decides accept or reject. In a deployed
//     system this runs on the remote server.
// The on-chip processor, the configuration controller and the server's
// database lie outside this module. What they exchange with the fabric is
// brought out as ports: challenge writes, PUF selection, start, the fingerprint
// and the template.
//
// Timing: load challenges with ch_we while busy is low, then pulse start.
// done pulses 1 + N_MCHAL*T_RESP_CYC cycles later (100 x 10 us = 1 ms at the
// defaults and 100 MHz). One cycle after that, match_valid pulses with hd and
// accept. Drive dc low in normal use; dc = 1 forces every stage of every PUF
// into the crossed setting.
`timescale 1ps/1fs
module puf_auth_top #(
  parameter int unsigned N_PUFS      = puf_pkg::N_PUFS,
  parameter int unsigned N_STAGES    = puf_pkg::N_STAGES,
  parameter int unsigned N_MCHAL     = puf_pkg::N_MCHAL,
  parameter int unsigned THRESH      = puf_pkg::THRESH_T,
  parameter int unsigned T_RESP_CYC  = 1000,
  parameter int unsigned SETUP_CYC   = 4,
  parameter int unsigned EVAL_CYC    = 500,
  parameter logic [31:0] LAYOUT_SEED = 32'h0000_0001,
  parameter logic [31:0] CHIP_SEED   = 32'h0000_00b0,
  parameter int unsigned JITTER_FS   = puf_pkg::JITTER_FS,
  localparam int unsigned AW = (N_MCHAL > 1) ? $clog2(N_MCHAL) : 1,
  localparam int unsigned SW = (N_PUFS  > 1) ? $clog2(N_PUFS)  : 1,
  localparam int unsigned HW = $clog2(N_MCHAL + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                dc,
  // challenges from the host
  input  logic                ch_we,
  input  logic [AW-1:0]       ch_addr,
  input  logic [N_STAGES-1:0] ch_wdata,
  // measurement command
  input  logic                start,
  input  logic [SW-1:0]       puf_sel,
  output logic                busy,
  output logic                done,
  output logic                err,
  output logic [N_MCHAL-1:0]  fingerprint,
  // verifier
  input  logic [N_MCHAL-1:0]  template_fp,
  output logic                match_valid,
  output logic [HW-1:0]       hd,
  output logic                accept
);
  logic [N_STAGES-1:0] puf_c;
  logic [N_PUFS-1:0]   puf_en, puf_ready, puf_r;

  for (genvar j = 0; j < N_PUFS; j++) begin : g_puf
    arbiter_puf #(
      .N_STAGES   (N_STAGES),
      .LAYOUT_SEED(LAYOUT_SEED),
      .CHIP_SEED  (CHIP_SEED),
      .PUF_INDEX  (j),
      .JITTER_FS  (JITTER_FS)
    ) u_puf (
      .c     (puf_c),
      .enable(puf_en[j]),
      .dc    (dc),
      .ready (puf_ready[j]),
      .r     (puf_r[j])
    );
  end

  fingerprint_sequencer #(
    .N_PUFS    (N_PUFS),
    .N_STAGES  (N_STAGES),
    .N_MCHAL   (N_MCHAL),
    .T_RESP_CYC(T_RESP_CYC),
    .SETUP_CYC (SETUP_CYC),
    .EVAL_CYC  (EVAL_CYC)
  ) u_seq (
    .clk        (clk),
    .rst_n      (rst_n),
    .ch_we      (ch_we),
    .ch_addr    (ch_addr),
    .ch_wdata   (ch_wdata),
    .start      (start),
    .puf_sel    (puf_sel),
    .busy       (busy),
    .done       (done),
    .err        (err),
    .fingerprint(fingerprint),
    .puf_c      (puf_c),
    .puf_en     (puf_en),
    .puf_ready  (puf_ready),
    .puf_r      (puf_r)
  );

  fingerprint_matcher #(
    .N_BITS(N_MCHAL),
    .THRESH(THRESH)
  ) u_match (
    .clk        (clk),
    .rst_n      (rst_n),
    .valid_in   (done),
    .template_fp(template_fp),
    .fingerprint(fingerprint),
    .valid_out  (match_valid),
    .hd         (hd),
    .accept     (accept)
  );

  // The configuration must fit the LUT region (1428 LUTs).
  initial assert (N_PUFS * puf_pkg::luts_per_puf(N_STAGES) <= puf_pkg::REGION_LUTS)
    else $error("puf_auth_top: %0d PUFs of %0d stages do not fit the LUT region",
                N_PUFS, N_STAGES);
endmodule
