// tb_remo_gamma_f -- runs the encoded recomputation on random operands and
// K values: after every word gamma_f must match an integer model of the step
// on aw + K*q, and the final value must be congruent mod q to the plain
// Montgomery product.
module tb_remo_gamma_f;
  import tb_ref_pkg::*;
  localparam int unsigned W = 4, L = 12, KW = 4, Q = 3329, NW = 3, GFW = KW + 2 * L + 2;
  logic clk = 0, clr, en;
  logic [W-1:0] aw;
  logic [KW-1:0] k;
  logic [L-1:0] beta;
  logic [GFW-1:0] gamma_f;
  int checks = 0, failures = 0;

  remo_gamma_f dut (.clk(clk), .clr(clr), .en(en), .aw(aw), .k(k), .beta(beta), .gamma_f(gamma_f));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned a, b, g, mu, awf, kk;
    clr = 1; en = 0; aw = 0; beta = 0; k = 0;
    @(negedge clk);
    for (int t = 0; t < 500; t++) begin
      a = $urandom_range(Q - 1); b = $urandom_range(Q - 1); kk = $urandom_range(15);
      if (t == 0) begin a = Q - 1; b = Q - 1; kk = 15; end
      beta = L'(b); k = KW'(kk); clr = 1; en = 0;
      @(negedge clk);
      clr = 0; g = 0;
      for (int s = 0; s < NW; s++) begin
        aw = W'(a >> (W * s)); en = 1;
        awf = aw + kk * Q;
        mu = ((g + awf * b) * 15) % 16;
        g  = (g + awf * b + mu * Q) / 16;
        @(negedge clk);
        checks++;
        if (gamma_f != GFW'(g)) begin
          failures++;
          $display("step mismatch a=%0d b=%0d K=%0d s=%0d got %0d exp %0d", a, b, kk, s, gamma_f, g);
        end
      end
      en = 0;
      checks++;
      if (longint'(gamma_f) % Q != montmul(a, b, L, W, Q)) begin
        failures++;
        $display("final not congruent a=%0d b=%0d K=%0d got %0d", a, b, kk, gamma_f);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
