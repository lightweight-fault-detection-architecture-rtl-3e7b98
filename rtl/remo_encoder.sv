// remo_encoder -- the REMO word encoder (Alg. 2 line 21).
//
// Adds a multiple of the modulus to a plain word: aw_f = aw + K * q. A word
// encoded this way is congruent to aw mod q, so the Montgomery accumulation on
// aw_f ends congruent to the one on aw; any difference flags a fault.
// The multiplier (x7 in the paper's figure) forms K * q and adder +3 adds the
// word. The figure labels the product "k.q'" while the algorithm and the lemma
// use K * q; only K * q keeps the two results congruent, so K * q is built.
//
// Purely combinational. Output width W + KW + L holds the largest sum.
module remo_encoder #(
  parameter int unsigned W  = ntt_pkg::W_DEF,
  parameter int unsigned L  = ntt_pkg::L_DEF,
  parameter int unsigned KW = ntt_pkg::KW_DEF,
  parameter int unsigned Q  = ntt_pkg::Q_DEF
) (
  input  logic [W-1:0]        aw,
  input  logic [KW-1:0]       k,
  output logic [W+KW+L-1:0]   aw_f
);
  localparam int unsigned OW = W + KW + L;

  logic [OW-1:0] kq;   // x7

  always_comb begin
    kq   = OW'(k) * OW'(Q);
    aw_f = kq + OW'(aw);   // +3
  end

endmodule
