// tb_ik_rc -- exhaustive: for every stage i and every k, ram_fault must be
// set exactly when k > (n-1) >> (i+1) and the check is valid.
module tb_ik_rc;
  localparam int unsigned N = 256, LOGN = 8;
  logic valid;
  logic [3:0] i;
  logic [7:0] k;
  logic ram_fault;
  int checks = 0, failures = 0;

  ik_rc dut (.valid(valid), .i(i), .k(k), .ram_fault(ram_fault));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp;
    for (int v = 0; v < 2; v++)
      for (int si = 0; si < LOGN; si++)
        for (int sk = 0; sk < N; sk++) begin
          valid = 1'(v); i = 4'(si); k = 8'(sk); #1;
          exp = v == 1 && sk >= (N >> (si + 1));
          checks++;
          if (ram_fault != exp) begin
            failures++;
            $display("v=%0d i=%0d k=%0d got %0b", v, si, sk, ram_fault);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
