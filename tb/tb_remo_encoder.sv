// tb_remo_encoder -- exhaustive check of aw_f = aw + K*q over all words and K.
module tb_remo_encoder;
  localparam int unsigned W = 4, L = 12, KW = 4, Q = 3329;
  logic [W-1:0] aw;
  logic [KW-1:0] k;
  logic [W+KW+L-1:0] aw_f;
  int checks = 0, failures = 0;

  remo_encoder dut (.aw(aw), .k(k), .aw_f(aw_f));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < (1 << W); a++)
      for (int kk = 0; kk < (1 << KW); kk++) begin
        aw = W'(a); k = KW'(kk); #1;
        checks++;
        if (int'(aw_f) != a + kk * int'(Q)) begin
          failures++;
          $display("aw=%0d k=%0d got %0d", a, kk, aw_f);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
