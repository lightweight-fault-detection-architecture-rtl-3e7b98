// mmrfd_comp -- the REMO comparator ("comp").
//
// gamma (plain datapath) and gamma_f (encoded datapath) are congruent mod q
// but not equal as integers: the encoded run carries extra multiples of q
// (the lemma ends with gamma_f * R mod q = gamma). The comparator therefore
// reduces both modulo q and flags any difference. Combinational.
module mmrfd_comp #(
  parameter int unsigned GW  = ntt_pkg::L_DEF + 1,
  parameter int unsigned GFW = ntt_pkg::KW_DEF + 2 * ntt_pkg::L_DEF + 2,
  parameter int unsigned Q   = ntt_pkg::Q_DEF
) (
  input  logic [GW-1:0]  gamma,
  input  logic [GFW-1:0] gamma_f,
  output logic           mismatch
);
  logic [GW-1:0]  r;
  logic [GFW-1:0] rf;

  always_comb begin
    r        = gamma % GW'(Q);
    rf       = gamma_f % GFW'(Q);
    mismatch = (GFW'(r) != rf);
  end

endmodule
