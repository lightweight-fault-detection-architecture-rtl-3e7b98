// ct_bu -- Cooley-Tukey butterfly unit with REMO-protected multiplier.
//
// For a pair (U, A) = (alpha[j+k], alpha[j+k+i/2]) and twiddle omega it forms
//   V = A * omega mod q            (mmrfd, Montgomery form twiddle)
//   alpha'[j+k]       = U + V mod q   (adder)
//   alpha'[j+k+i/2]   = U - V mod q   (subtractor)
// in three pipeline stages, as the paper's pipeline figure shows:
//   1. buffer: U, A, omega and the two write-back addresses are registered;
//   2. V: the buffered pair is handed to mmrfd as soon as it is ready
//      (ceil(l/w) + 3 clocks per product with the defaults: 6);
//   3. update: U+V and U-V are registered and presented as a write with the
//      butterfly's mmrfd_fault flag.
// Inputs must be reduced (< q). `in_ready` is high while the stage-1 buffer is
// empty; a producer may present `in_valid` only then. `empty` is high when no
// butterfly is anywhere in the unit. One butterfly completes per mmrfd
// period, and stage 1 of the next butterfly overlaps stage 2 of the current.
// Only the OR of the multiplier's per-word flags (mmrfd_fault) leaves the
// unit, as in the paper's architecture; the per-word vector f (m_f) is
// deliberately not used further.
module ct_bu #(
  parameter int unsigned N  = ntt_pkg::N_DEF,
  parameter int unsigned L  = ntt_pkg::L_DEF,
  parameter int unsigned W  = ntt_pkg::W_DEF,
  parameter int unsigned KW = ntt_pkg::KW_DEF,
  parameter int unsigned Q  = ntt_pkg::Q_DEF,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [KW-1:0] k,
  input  logic          in_valid,
  input  logic [L-1:0]  in_u,
  input  logic [L-1:0]  in_a,
  input  logic [L-1:0]  in_w,
  input  logic [AW-1:0] in_addr0,
  input  logic [AW-1:0] in_addr1,
  output logic          in_ready,
  output logic          empty,
  output logic          wr_valid,
  output logic [AW-1:0] wr_addr0,
  output logic [AW-1:0] wr_addr1,
  output logic [L-1:0]  wr_data0,
  output logic [L-1:0]  wr_data1,
  output logic          mmrfd_fault
);
  // stage 1: buffer
  logic          s1_valid;
  logic [L-1:0]  s1_u, s1_a, s1_w;
  logic [AW-1:0] s1_addr0, s1_addr1;
  // stage 2: multiplication in flight
  logic          s2_valid;
  logic [L-1:0]  s2_u;
  logic [AW-1:0] s2_addr0, s2_addr1;

  logic          m_ready, m_done, m_fault, m_start;
  logic [L-1:0]  m_v;
  logic [ntt_pkg::num_words(L, W)-1:0] m_f;
  logic [L:0]    sum, diff;

  assign in_ready = !s1_valid;
  assign m_start  = s1_valid && m_ready;
  assign empty    = !s1_valid && !s2_valid && !wr_valid;

  mmrfd #(.L(L), .W(W), .KW(KW), .Q(Q)) u_mmrfd (
    .clk(clk), .rst_n(rst_n), .start(m_start), .alpha(s1_a), .beta(s1_w), .k(k),
    .ready(m_ready), .done(m_done), .v(m_v), .f(m_f), .mmrfd_fault(m_fault)
  );

  always_comb begin
    sum  = (L+1)'(s2_u) + (L+1)'(m_v);
    if (sum >= (L+1)'(Q)) sum = sum - (L+1)'(Q);
    diff = (L+1)'(s2_u) - (L+1)'(m_v);
    if (s2_u < m_v) diff = diff + (L+1)'(Q);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid    <= 1'b0;
      s2_valid    <= 1'b0;
      wr_valid    <= 1'b0;
      mmrfd_fault <= 1'b0;
    end else begin
      // stage 3
      wr_valid <= m_done && s2_valid;
      if (m_done) begin
        wr_data0    <= L'(sum);
        wr_data1    <= L'(diff);
        wr_addr0    <= s2_addr0;
        wr_addr1    <= s2_addr1;
        mmrfd_fault <= m_fault;
      end else begin
        mmrfd_fault <= 1'b0;
      end
      // stage 2
      if (m_start) begin
        s2_valid <= 1'b1;
        s2_u     <= s1_u;
        s2_addr0 <= s1_addr0;
        s2_addr1 <= s1_addr1;
      end else if (m_done) begin
        s2_valid <= 1'b0;
      end
      // stage 1
      if (in_valid) begin
        s1_valid <= 1'b1;
        s1_u     <= in_u;
        s1_a     <= in_a;
        s1_w     <= in_w;
        s1_addr0 <= in_addr0;
        s1_addr1 <= in_addr1;
      end else if (m_start) begin
        s1_valid <= 1'b0;
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> in_ready);

endmodule
