// tb_ijk_gen -- steps the generator through a whole forward and a whole
// inverse transform and compares i, j, k, the RAM and ROM addresses and the
// first/last flags with nested loops. Each transform must take
// log2(n) * n/2 = 1024 butterflies; idle clocks in between must not advance.
module tb_ijk_gen;
  localparam int unsigned N = 256, LOGN = 8;
  logic clk = 0, rst_n = 0, load = 0, step = 0, inv = 0;
  logic [3:0] i;
  logic [7:0] j, k, addr0, addr1;
  logic [8:0] rom_addr;
  logic first, last;
  int checks = 0, failures = 0;

  ijk_gen dut (.clk(clk), .rst_n(rst_n), .load(load), .step(step), .inv(inv), .i(i), .j(j),
               .k(k), .addr0(addr0), .addr1(addr1), .rom_addr(rom_addr), .first(first),
               .last(last));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic walk(input bit dir_inv);
    int unsigned len, e0, e1, er, count;
    count = 0;
    @(negedge clk);
    load = 1; inv = dir_inv;
    @(negedge clk);
    load = 0; inv = !dir_inv;   // inv is only sampled on load
    for (int unsigned si = 0; si < LOGN; si++) begin
      len = N >> (si + 1);
      for (int unsigned sj = 0; sj < (1 << si); sj++)
        for (int unsigned sk = 0; sk < len; sk++) begin
          if (dir_inv) begin
            e0 = sk * (2 << si) + sj; e1 = e0 + (1 << si); er = N + (1 << si) + sj;
          end else begin
            e0 = sj * 2 * len + sk;   e1 = e0 + len;       er = (1 << si) + sj;
          end
          checks++;
          if (i != 4'(si) || j != 8'(sj) || k != 8'(sk) || addr0 != 8'(e0) ||
              addr1 != 8'(e1) || rom_addr != 9'(er) || first != (sj == 0 && sk == 0) ||
              last != (si == LOGN - 1 && sj == (1 << si) - 1 && sk == len - 1)) begin
            failures++;
            $display("inv=%0b at %0d/%0d/%0d got i=%0d j=%0d k=%0d a0=%0d a1=%0d r=%0d f=%0b l=%0b",
                     dir_inv, si, sj, sk, i, j, k, addr0, addr1, rom_addr, first, last);
          end
          count++;
          if (count % 50 == 0) begin step = 0; @(negedge clk); end
          step = 1;
          @(negedge clk);
          step = 0;
        end
    end
    checks++;
    if (count != 1024) begin failures++; $display("count %0d", count); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    walk(1'b0);
    walk(1'b1);
    walk(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
