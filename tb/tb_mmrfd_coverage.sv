// tb_mmrfd_coverage -- REMO detection of operand faults at the published
// evaluation size: l = 24, q = 8380417 (23-bit prime), word sizes w = 2, 4, 8.
//
// One mmrfd per word size. Each first computes clean products, which must
// equal alpha * beta * R^-1 mod q with no flag. Then eta bits
// (eta = 1, 3, 5, 11, 17, 23) are flipped:
//   in alpha, in omega (beta), or in both;
//   random mode: eta distinct positions; burst mode: eta adjacent bits.
// The corrupted operand reaches only the plain gamma path. It is forced onto
// that path's word bus and multiplier input for the whole product, as a fault
// inside that path's window would do. The REMO path keeps the true operands.
// The check is exact: mmrfd_fault must rise exactly when the returned V
// differs from the fault-free product, so no wrong result may escape
// unflagged and no correct one may be flagged. The share of flagged
// products per cell is printed. The fault model and the sample count are this
// testbench's choices; the published campaign is a software model whose
// injection point is not stated.
module tb_mmrfd_coverage;
  logic clk = 0, rst_n = 0;
  logic fin2, fin4, fin8;
  int c2, c4, c8, f2, f4, f8;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tb_mmrfd_cov_unit #(.W(2), .FIRST(1'b1)) u_w2 (.clk(clk), .rst_n(rst_n), .go(rst_n), .fin(fin2),
                                                  .checks(c2), .failures(f2));
  tb_mmrfd_cov_unit #(.W(4)) u_w4 (.clk(clk), .rst_n(rst_n), .go(fin2), .fin(fin4),
                                   .checks(c4), .failures(f4));
  tb_mmrfd_cov_unit #(.W(8)) u_w8 (.clk(clk), .rst_n(rst_n), .go(fin4), .fin(fin8),
                                   .checks(c8), .failures(f8));

  initial begin
    repeat (3000000) @(posedge clk);
    failures = f2 + f4 + f8 + 1;
    checks = c2 + c4 + c8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (fin8);
    @(negedge clk);
    checks = c2 + c4 + c8;
    failures = f2 + f4 + f8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
