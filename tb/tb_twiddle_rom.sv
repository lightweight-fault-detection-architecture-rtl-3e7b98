// tb_twiddle_rom -- every ROM word the transforms read, against
// omega^(bitrev_i(j) * n/2^(i+1)) * R mod q (forward half) and
// omega^-(j * n/2^(i+1)) * R mod q (inverse half, omega^-1 found by Fermat
// inversion), with omega = 17, R = 2^12, computed by repeated multiplication.
module tb_twiddle_rom;
  import tb_ref_pkg::*;
  localparam int unsigned N = 256, L = 12, Q = 3329, LOGN = 8;
  logic clk = 0, rd_en = 0;
  logic [8:0] addr;
  logic [L-1:0] dout;
  int checks = 0, failures = 0;

  twiddle_rom dut (.clk(clk), .rd_en(rd_en), .addr(addr), .dout(dout));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned e, exp, winv;
    winv = invmod(17, Q);
    for (int unsigned h = 0; h < 2; h++)
      for (int unsigned i = 0; i < LOGN; i++)
        for (int unsigned j = 0; j < (1 << i); j++) begin
          @(negedge clk);
          addr = 9'(h * N + (1 << i) + j); rd_en = 1;
          if (h == 0) begin
            e = longint'(brev(j, i)) * (N >> (i + 1));
            exp = mulmod(powmod(17, e, Q), 4096, Q);
          end else begin
            e = longint'(j) * (N >> (i + 1));
            exp = mulmod(powmod(winv, e, Q), 4096, Q);
          end
          @(negedge clk);
          rd_en = 0;
          checks++;
          if (dout != L'(exp)) begin
            failures++;
            $display("addr %0d got %0d exp %0d", addr, dout, exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
