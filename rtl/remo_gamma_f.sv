// remo_gamma_f -- the REMO recomputation datapath ("gamma_i^f: REMO").
//
// Encodes each incoming w-bit word with remo_encoder (aw_f = aw + K*q) and runs
// the same Montgomery step as gamma_gen on it (multipliers x4..x6, adders +4
// and +5, Alg. 2 lines 21-23). Because aw_f is congruent to aw, the accumulator
// gamma_f stays congruent mod q to gamma of the plain datapath after every word,
// though it is numerically larger.
//
// Interface and timing match gamma_gen: `clr` zeroes, `en` steps, gamma_f is
// registered. In mmrfd this datapath is stepped one clock behind gamma_gen and
// reads the operand registers itself, so a one-clock upset of an operand hits
// the two computations at different words.
module remo_gamma_f #(
  parameter int unsigned W   = ntt_pkg::W_DEF,
  parameter int unsigned L   = ntt_pkg::L_DEF,
  parameter int unsigned KW  = ntt_pkg::KW_DEF,
  parameter int unsigned Q   = ntt_pkg::Q_DEF,
  parameter int unsigned GFW = KW + 2 * L + 2
) (
  input  logic           clk,
  input  logic           clr,
  input  logic           en,
  input  logic [W-1:0]   aw,
  input  logic [KW-1:0]  k,
  input  logic [L-1:0]   beta,
  output logic [GFW-1:0] gamma_f
);
  logic [W+KW+L-1:0] aw_f;

  remo_encoder #(.W(W), .L(L), .KW(KW), .Q(Q)) u_enc (
    .aw(aw), .k(k), .aw_f(aw_f)
  );

  gamma_gen #(.W(W), .L(L), .AWW(W + KW + L), .GW(GFW), .Q(Q)) u_step (
    .clk(clk), .clr(clr), .en(en), .aw(aw_f), .beta(beta), .gamma(gamma_f)
  );

endmodule
