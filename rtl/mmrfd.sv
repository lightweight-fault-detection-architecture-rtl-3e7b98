// mmrfd -- Modified Montgomery multiplication with REMO fault detection
// (Alg. 2 of the design, "MMRFD").
//
// Computes V = alpha * beta * R^-1 mod q word by word, R = 2^(w*NW),
// NW = ceil(l/w), and checks it by recomputation on an encoded operand:
//   * alpha is zero padded to NW*w bits and held in the alpha' register,
//     beta in the omega' register (the twiddle factor);
//   * a right shift of alpha' by w*step bits selects the word aw_i;
//   * gamma_gen accumulates the plain words, remo_gamma_f the words encoded
//     as aw_i + K*q;
//   * after every word the comparator checks the two accumulators mod q and
//     sets the word's flag f_i; mmrfd_fault is the OR of all flags.
// The final gamma lies in [0, 2q) and one conditional subtraction gives V.
//
// Timing. The paper runs the detection logic on a clock delayed against the
// NTT datapath so that transient faults hit the two computations differently.
// Here this is a one-clock skew: the REMO datapath steps word i one clock
// after gamma_gen and reads alpha' and omega' itself at that later clock, so an
// operand upset lasting one clock corrupts only one of the two results. The
// operand registers are therefore held for NW+1 clocks.
//   cycle 0          `start` accepted (ready = 1), operands loaded, accumulators cleared
//   cycles 1..NW     gamma_gen steps words 0..NW-1
//   cycles 2..NW+1   remo_gamma_f steps words 0..NW-1
//   cycles 3..NW+2   word flags compared (gamma delayed by one clock)
//   cycle  NW+3      `done` pulses with `v`, `f` and `mmrfd_fault`; ready again
// With the defaults (l = 12, w = 4, NW = 3) a product takes 6 clocks from
// start to done and a new one may start in the done cycle.
module mmrfd #(
  parameter int unsigned L  = ntt_pkg::L_DEF,
  parameter int unsigned W  = ntt_pkg::W_DEF,
  parameter int unsigned KW = ntt_pkg::KW_DEF,
  parameter int unsigned Q  = ntt_pkg::Q_DEF,
  localparam int unsigned NW = ntt_pkg::num_words(L, W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [L-1:0]  alpha,
  input  logic [L-1:0]  beta,
  input  logic [KW-1:0] k,
  output logic          ready,
  output logic          done,
  output logic [L-1:0]  v,
  output logic [NW-1:0] f,
  output logic          mmrfd_fault
);
  localparam int unsigned LP  = NW * W;          // padded operand width
  localparam int unsigned GW  = L + 1;
  localparam int unsigned GFW = KW + 2 * L + 2;
  localparam int unsigned CW  = $clog2(NW + 2);

  logic [LP-1:0]  alpha_p;    // alpha'
  logic [L-1:0]   beta_p;     // omega'
  logic           busy;
  logic [CW-1:0]  cyc;        // 0 .. NW+1 while busy
  logic [NW-1:0]  f_acc;

  logic           g_en, r_en, clr;
  logic [W-1:0]   aw_g, aw_r;
  logic [GW-1:0]  gamma, gamma_d;
  logic [GFW-1:0] gamma_f;
  logic           mismatch;
  logic [NW-1:0]  f_next;     // flags including this clock's comparison

  assign ready = !busy;
  assign clr   = start && !busy;

  always_comb begin
    g_en = busy && (cyc < CW'(NW));
    r_en = busy && (cyc >= CW'(1)) && (cyc <= CW'(NW));
    aw_g = W'(alpha_p >> (W * 32'(cyc)));                          // right shifter
    aw_r = W'(alpha_p >> (W * ((cyc == '0) ? 32'd0 : 32'(cyc) - 32'd1)));
    f_next = f_acc;
    for (int unsigned s = 0; s < NW; s++)
      if (busy && 32'(cyc) == s + 2) f_next[s] = mismatch;     // f_i
  end

  gamma_gen #(.W(W), .L(L), .AWW(W), .GW(GW), .Q(Q)) u_gamma (
    .clk(clk), .clr(clr), .en(g_en), .aw(aw_g), .beta(beta_p), .gamma(gamma)
  );

  remo_gamma_f #(.W(W), .L(L), .KW(KW), .Q(Q), .GFW(GFW)) u_remo (
    .clk(clk), .clr(clr), .en(r_en), .aw(aw_r), .k(k), .beta(beta_p), .gamma_f(gamma_f)
  );

  mmrfd_comp #(.GW(GW), .GFW(GFW), .Q(Q)) u_comp (
    .gamma(gamma_d), .gamma_f(gamma_f), .mismatch(mismatch)
  );

  always_ff @(posedge clk) begin
    gamma_d <= gamma;
    if (!rst_n) begin
      busy        <= 1'b0;
      cyc         <= '0;
      f_acc       <= '0;
      done        <= 1'b0;
      v           <= '0;
      f           <= '0;
      mmrfd_fault <= 1'b0;
      alpha_p     <= '0;
      beta_p      <= '0;
    end else begin
      done <= 1'b0;
      if (clr) begin
        alpha_p <= LP'(alpha);                                 // zero padding
        beta_p  <= beta;
        busy    <= 1'b1;
        cyc     <= '0;
        f_acc   <= '0;
      end else if (busy) begin
        f_acc <= f_next;
        if (cyc == CW'(NW + 1)) begin
          busy        <= 1'b0;
          done        <= 1'b1;
          v           <= (gamma >= GW'(Q)) ? L'(gamma - GW'(Q)) : L'(gamma);
          f           <= f_next;
          mmrfd_fault <= |f_next;
        end else begin
          cyc <= cyc + CW'(1);
        end
      end
    end
  end

  a_start_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> ready);

endmodule
