// gamma_gen -- one word-wise Montgomery accumulation step per clock (the
// "gamma_i Gen" of the REMO architecture, Alg. 2 lines 19-20).
//
// Each enabled clock consumes one w-bit word aw of the padded multiplicand
// alpha' and updates the accumulator
//     mu    = ((gamma mod 2^w) + aw * (beta mod 2^w)) * q' mod 2^w
//     gamma = (gamma + aw * beta + mu * q) / 2^w
// The mod 2^w is a truncation to w bits and the division by 2^w drops the w
// low bits, which are zero by construction (checked by an assertion). After
// all ceil(l/w) words gamma = alpha * beta * 2^(-w*ceil(l/w)) mod q, in [0, 2q).
//
// Interface: `clr` zeroes the accumulator (Alg. 2 line 12), `en` performs one
// step with the word on `aw`; gamma is registered, so the new value appears
// one clock after the step. The multiplier products x1 (aw * beta0), x2
// (mu * q) and x3 (aw * beta) and adders +1 / +2 follow the paper's figure;
// the product with q' is written out as the algorithm states it (with
// q = 3329 and w = 4, q' = 15, which synthesis reduces to a negation).
//
// The same module, with a wider word input, is the recomputation datapath of
// remo_gamma_f; AWW and GW size it.
module gamma_gen #(
  parameter int unsigned W   = ntt_pkg::W_DEF,
  parameter int unsigned L   = ntt_pkg::L_DEF,
  parameter int unsigned AWW = W,             // width of the word input
  parameter int unsigned GW  = L + 1,         // width of the accumulator
  parameter int unsigned Q   = ntt_pkg::Q_DEF,
  parameter int unsigned QP  = ntt_pkg::qprime(Q, W)
) (
  input  logic           clk,
  input  logic           clr,
  input  logic           en,
  input  logic [AWW-1:0] aw,
  input  logic [L-1:0]   beta,
  output logic [GW-1:0]  gamma
);
  localparam int unsigned SW = ntt_pkg::max3(GW, AWW + L, W + L) + 2;

  logic [W-1:0]  mu_pre;   // +1 output, truncated to w bits
  logic [W-1:0]  mu;
  logic [SW-1:0] sum;      // +2 output before the shift

  always_comb begin
    mu_pre = gamma[W-1:0] + W'(aw * beta[W-1:0]);
    mu     = W'(mu_pre * W'(QP));
    sum    = SW'(gamma) + SW'(aw) * SW'(beta) + SW'(mu) * SW'(Q);
  end

  always_ff @(posedge clk) begin
    if (clr)     gamma <= '0;
    else if (en) gamma <= GW'(sum >> W);
  end

  // The Montgomery step must leave w zero bits to drop.
  a_low_zero: assert property (@(posedge clk) en && !clr |-> sum[W-1:0] == '0);

endmodule
