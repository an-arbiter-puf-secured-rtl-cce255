// fingerprint_sequencer: takes one "fingerprint" from a chosen arbiter PUF.
// It applies the stored m-challenges one after another, samples each
// single-bit response and packs the responses into an N_MCHAL-bit word.
//
// The published system applies 100 64-bit m-challenges per fingerprint, and
// one response takes about 10 us, so a fingerprint takes about 1 ms. It keeps
// ten PUFs in one configuration. In the published system the on-chip processor
// moves challenges and responses between the server and the fabric; how the
// loop is coded is not given. This block is this design's own fabric
// implementation of that loop.
//
// Operation. While idle, the host writes challenges into a small buffer
// (ch_we, ch_addr, ch_wdata; challenge k gives fingerprint bit k). A start
// pulse latches puf_sel and begins. Each challenge gets a slot of exactly
// T_RESP_CYC clock cycles:
//   cycle 0              the challenge is driven onto puf_c (enable low)
//   cycles SETUP_CYC ..  enable of the selected PUF is high for EVAL_CYC cycles
//   last enable cycle    r and ready, passed through 2-flop synchronisers, are
//                        sampled; a missing ready sets err
//   rest of the slot     enable low, so the falling edges clear the chain
// After N_MCHAL slots, done pulses for one cycle and fingerprint holds the
// result until the next start. From start to done takes 1 + N_MCHAL*T_RESP_CYC
// cycles. The default 1000 cycles at a 100 MHz clock gives the published
// 10 us per response.
//
// The clock frequency, slot split, buffer and handshake are this design's
// choices.
`timescale 1ps/1fs
module fingerprint_sequencer #(
  parameter int unsigned N_PUFS     = puf_pkg::N_PUFS,
  parameter int unsigned N_STAGES   = puf_pkg::N_STAGES,
  parameter int unsigned N_MCHAL    = puf_pkg::N_MCHAL,
  parameter int unsigned T_RESP_CYC = 1000,
  parameter int unsigned SETUP_CYC  = 4,
  parameter int unsigned EVAL_CYC   = 500,
  localparam int unsigned AW = (N_MCHAL > 1) ? $clog2(N_MCHAL) : 1,
  localparam int unsigned SW = (N_PUFS  > 1) ? $clog2(N_PUFS)  : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // challenge buffer write port (ignored while busy)
  input  logic                ch_we,
  input  logic [AW-1:0]       ch_addr,
  input  logic [N_STAGES-1:0] ch_wdata,
  // command
  input  logic                start,
  input  logic [SW-1:0]       puf_sel,
  output logic                busy,
  output logic                done,
  output logic                err,
  output logic [N_MCHAL-1:0]  fingerprint,
  // to / from the PUFs
  output logic [N_STAGES-1:0] puf_c,
  output logic [N_PUFS-1:0]   puf_en,
  input  logic [N_PUFS-1:0]   puf_ready,
  input  logic [N_PUFS-1:0]   puf_r
);
  localparam int unsigned CW = $clog2(T_RESP_CYC + 1);
  localparam int unsigned SAMPLE_AT = SETUP_CYC + EVAL_CYC - 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN} state_t;

  state_t              state;
  logic [N_STAGES-1:0] chal_mem [N_MCHAL];
  logic [AW-1:0]       idx;
  logic [CW-1:0]       cnt, cnt_nxt;
  logic [SW-1:0]       sel_q;
  logic                en_q;
  logic                r_meta, r_sync, rdy_meta, rdy_sync;

  // challenge buffer
  always_ff @(posedge clk) begin
    if (ch_we && state == S_IDLE) chal_mem[ch_addr] <= ch_wdata;
  end

  // synchronisers for the asynchronous PUF outputs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_meta   <= 1'b0;
      r_sync   <= 1'b0;
      rdy_meta <= 1'b0;
      rdy_sync <= 1'b0;
    end else begin
      r_meta   <= puf_r[sel_q];
      r_sync   <= r_meta;
      rdy_meta <= puf_ready[sel_q];
      rdy_sync <= rdy_meta;
    end
  end

  always_comb cnt_nxt = (cnt == CW'(T_RESP_CYC - 1)) ? '0 : cnt + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      idx         <= '0;
      cnt         <= '0;
      sel_q       <= '0;
      en_q        <= 1'b0;
      done        <= 1'b0;
      err         <= 1'b0;
      fingerprint <= '0;
      puf_c       <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          en_q <= 1'b0;
          if (start) begin
            state       <= S_RUN;
            sel_q       <= puf_sel;
            idx         <= '0;
            cnt         <= '0;
            err         <= 1'b0;
            fingerprint <= '0;
            puf_c       <= chal_mem[0];
          end
        end
        S_RUN: begin
          cnt  <= cnt_nxt;
          en_q <= (cnt_nxt >= CW'(SETUP_CYC)) && (cnt_nxt < CW'(SETUP_CYC + EVAL_CYC));
          if (cnt == CW'(SAMPLE_AT)) begin
            fingerprint[idx] <= r_sync;
            if (!rdy_sync) err <= 1'b1;
          end
          if (cnt == CW'(T_RESP_CYC - 1)) begin
            if (idx == AW'(N_MCHAL - 1)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              idx   <= idx + 1'b1;
              puf_c <= chal_mem[idx + 1'b1];
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    puf_en = '0;
    puf_en[sel_q] = en_q;
  end

  assign busy = (state != S_IDLE);

  // The slot must leave room to launch, settle, sample and clear the chain.
  initial begin
    assert (SETUP_CYC >= 1 && EVAL_CYC >= 4 && SETUP_CYC + EVAL_CYC + 2 <= T_RESP_CYC)
      else $error("fingerprint_sequencer: slot timing parameters inconsistent");
    assert (N_PUFS <= (1 << SW))
      else $error("fingerprint_sequencer: puf_sel too narrow");
  end

  // At most one PUF is ever launched.
  a_one_enable: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(puf_en));
  // A start while busy is ignored; the selected PUF stays fixed during a run.
  a_sel_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 busy && $past(busy) |-> sel_q == $past(sel_q));
endmodule
