// coeff_ram -- polynomial coefficient RAM ("RAMs").
//
// n words of l bits holding one polynomial. Two read ports share one read
// enable, so a butterfly's two operands alpha[j+k] and alpha[j+k+i/2] are
// fetched in one clock; two write ports store the butterfly's two results in
// one clock. Reads are synchronous (data one clock after the enable, old data
// on a read of a word written in the same clock). If both write ports hit the
// same word, port 1 wins. The port count is this design's choice; the paper
// only names the RAMs and their addr / rd_en / wr_en / din / dout signals.
module coeff_ram #(
  parameter int unsigned N = ntt_pkg::N_DEF,
  parameter int unsigned L = ntt_pkg::L_DEF,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] ra0,
  input  logic [AW-1:0] ra1,
  output logic [L-1:0]  rd0,
  output logic [L-1:0]  rd1,
  input  logic          we0,
  input  logic [AW-1:0] wa0,
  input  logic [L-1:0]  wd0,
  input  logic          we1,
  input  logic [AW-1:0] wa1,
  input  logic [L-1:0]  wd1
);
  logic [L-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd0 <= mem[ra0];
      rd1 <= mem[ra1];
    end
    if (we0) mem[wa0] <= wd0;
    if (we1) mem[wa1] <= wd1;
  end

endmodule
