// twiddle_rom -- twiddle factor ROM for the forward and the inverse transform.
//
// 2n words. The lower half serves the forward transform: address a = 2^i + j
// holds the twiddle of stage i, group j, omega^(bitrev_i(j) * n / 2^(i+1)).
// The upper half serves the inverse transform: address n + 2^i + j holds
// omega^(-j * n / 2^(i+1)), twiddle j of stage i. Every word is premultiplied
// by the Montgomery constant R = 2^(w*ceil(l/w)) mod q, so the Montgomery
// product in the butterfly yields alpha * omega^e mod q directly (see
// ntt_pkg::twiddle). Addresses 0 and n hold R mod q and are never read.
// With this layout the rule j <= 2^i - 1 of the i-j checker is exactly the
// condition that stage i stays inside its own part of the ROM, in both
// directions.
// The contents are computed at elaboration from (n, q, omega); the paper
// points to FIPS 203 for the factors, and the two-half layout is this
// design's choice. Synchronous read, one clock latency.
module twiddle_rom #(
  parameter int unsigned N     = ntt_pkg::N_DEF,
  parameter int unsigned L     = ntt_pkg::L_DEF,
  parameter int unsigned W     = ntt_pkg::W_DEF,
  parameter int unsigned Q     = ntt_pkg::Q_DEF,
  parameter int unsigned OMEGA = ntt_pkg::root_3329(N),
  localparam int unsigned AW = $clog2(N) + 1
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] addr,
  output logic [L-1:0]  dout
);
  logic [L-1:0] rom [2*N];

  initial begin
    for (int unsigned a = 0; a < 2 * N; a++)
      rom[a] = L'(ntt_pkg::twiddle(a, N, Q, OMEGA, L, W));
  end

  always_ff @(posedge clk) begin
    if (rd_en) dout <= rom[addr];
  end

endmodule
