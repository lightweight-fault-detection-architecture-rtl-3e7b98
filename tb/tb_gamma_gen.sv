// tb_gamma_gen -- checks the word-wise Montgomery step: after ceil(l/w) steps
// on random operands the accumulator must be congruent to
// alpha*beta*2^(-w*ceil(l/w)) mod q and lie below 2q; every step is also
// compared with a step-by-step integer model.
module tb_gamma_gen;
  import tb_ref_pkg::*;
  localparam int unsigned W = 4, L = 12, Q = 3329, NW = 3;
  logic clk = 0, clr, en;
  logic [W-1:0] aw;
  logic [L-1:0] beta;
  logic [L:0] gamma;
  int checks = 0, failures = 0;

  gamma_gen dut (.clk(clk), .clr(clr), .en(en), .aw(aw), .beta(beta), .gamma(gamma));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned a, b, g, mu, qp;
    qp = 15;   // -3329^-1 mod 16
    clr = 1; en = 0; aw = 0; beta = 0;
    @(negedge clk);
    for (int t = 0; t < 500; t++) begin
      a = $urandom_range(Q - 1); b = $urandom_range(Q - 1);
      if (t == 0) begin a = Q - 1; b = Q - 1; end
      beta = L'(b); clr = 1; en = 0;
      @(negedge clk);
      clr = 0; g = 0;
      for (int s = 0; s < NW; s++) begin
        aw = W'(a >> (W * s)); en = 1;
        mu = ((g + aw * b) * qp) % 16;
        g  = (g + aw * b + mu * Q) / 16;
        @(negedge clk);
        checks++;
        if (gamma != (L+1)'(g)) begin
          failures++;
          $display("step mismatch a=%0d b=%0d s=%0d got %0d exp %0d", a, b, s, gamma, g);
        end
      end
      en = 0;
      checks++;
      if (longint'(gamma) % Q != montmul(a, b, L, W, Q) || gamma >= 2 * Q) begin
        failures++;
        $display("final mismatch a=%0d b=%0d got %0d", a, b, gamma);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
