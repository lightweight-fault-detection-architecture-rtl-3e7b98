// tb_ij_rc -- exhaustive: rom_fault must be set exactly when j >= 2^i and the
// check is valid.
module tb_ij_rc;
  localparam int unsigned N = 256, LOGN = 8;
  logic valid;
  logic [3:0] i;
  logic [7:0] j;
  logic rom_fault;
  int checks = 0, failures = 0;

  ij_rc dut (.valid(valid), .i(i), .j(j), .rom_fault(rom_fault));

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
        for (int sj = 0; sj < N; sj++) begin
          valid = 1'(v); i = 4'(si); j = 8'(sj); #1;
          exp = v == 1 && sj >= (1 << si);
          checks++;
          if (rom_fault != exp) begin
            failures++;
            $display("v=%0d i=%0d j=%0d got %0b", v, si, sj, rom_fault);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
