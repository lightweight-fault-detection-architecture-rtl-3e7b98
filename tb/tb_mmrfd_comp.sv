// tb_mmrfd_comp -- the comparator must report equal residues mod q as a match
// (including pairs that differ by multiples of q) and anything else as a mismatch.
module tb_mmrfd_comp;
  localparam int unsigned Q = 3329, GW = 13, GFW = 30;
  logic [GW-1:0] gamma;
  logic [GFW-1:0] gamma_f;
  logic mismatch;
  int checks = 0, failures = 0;

  mmrfd_comp dut (.gamma(gamma), .gamma_f(gamma_f), .mismatch(mismatch));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned g, gf;
    bit exp;
    for (int t = 0; t < 4000; t++) begin
      g = $urandom_range(2 * Q - 1);
      if (t % 2 == 0) gf = (g % Q) + longint'(Q) * $urandom_range(100000);
      else            gf = $urandom_range(32'h3FFF_FFFF);
      gamma = GW'(g); gamma_f = GFW'(gf); #1;
      exp = (g % Q) != (gf % Q);
      checks++;
      if (mismatch != exp) begin
        failures++;
        $display("g=%0d gf=%0d got %0b exp %0b", g, gf, mismatch, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
