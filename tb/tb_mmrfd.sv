// tb_mmrfd -- random Montgomery products against a plain modular reference,
// a start-to-done latency of l/w + 3 = 6 clocks, no false alarms, and fault
// detection: a one-clock upset of a word on the plain datapath, or on the
// REMO datapath, must raise mmrfd_fault (guaranteed when beta != 0 mod q,
// since the two results then differ by a non-zero multiple of beta mod q).
module tb_mmrfd;
  import tb_ref_pkg::*;
  localparam int unsigned L = 12, W = 4, KW = 4, Q = 3329, NW = 3;
  logic clk = 0, rst_n = 0, start = 0;
  logic [L-1:0] alpha, beta, v;
  logic [KW-1:0] k = 3;
  logic ready, done, mmrfd_fault;
  logic [NW-1:0] f;
  int checks = 0, failures = 0, detected = 0, injected = 0;

  mmrfd dut (.clk(clk), .rst_n(rst_n), .start(start), .alpha(alpha), .beta(beta), .k(k),
             .ready(ready), .done(done), .v(v), .f(f), .mmrfd_fault(mmrfd_fault));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // inject: 0 none, 1 plain-path word, 2 REMO-path word; at word s, bit b
  task automatic run(input longint unsigned a, input longint unsigned b, input int inj,
                     input int s, input int bitpos);
    int lat;
    logic [W-1:0] bad;
    @(negedge clk);
    alpha = L'(a); beta = L'(b); start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    // negedge after the start edge is cycle c=0 of the operation
    for (int c = 0; c <= NW + 1; c++) begin
      bad = W'(a >> (W * s)) ^ W'(1 << bitpos);
      if (inj == 1 && c == s)     force dut.aw_g = bad;
      if (inj == 2 && c == s + 1) force dut.aw_r = bad;
      @(negedge clk);
      release dut.aw_g; release dut.aw_r;
      lat++;
      if (done) break;
    end
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (lat != NW + 3) begin failures++; $display("latency %0d", lat); end
    if (inj == 0) begin
      checks++;
      if (longint'(v) != montmul(a, b, L, W, Q) || mmrfd_fault || f != 0) begin
        failures++;
        $display("a=%0d b=%0d v=%0d exp %0d fault=%0b", a, b, v, montmul(a, b, L, W, Q), mmrfd_fault);
      end
    end else begin
      injected++;
      if (mmrfd_fault) detected++;
      checks++;
      if (b != 0 && !mmrfd_fault) begin
        failures++;
        $display("missed fault a=%0d b=%0d path=%0d word=%0d bit=%0d", a, b, inj, s, bitpos);
      end
    end
  endtask

  initial begin
    alpha = 0; beta = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(Q - 1, Q - 1, 0, 0, 0);
    run(0, 5, 0, 0, 0);
    for (int t = 0; t < 1000; t++)
      run($urandom_range(Q - 1), $urandom_range(Q - 1), 0, 0, 0);
    for (int t = 0; t < 300; t++)
      run($urandom_range(Q - 1), $urandom_range(1, Q - 1), 1 + (t % 2),
          $urandom_range(NW - 1), $urandom_range(W - 1));
    $display("injected %0d detected %0d", injected, detected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
