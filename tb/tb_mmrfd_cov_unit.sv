// tb_mmrfd_cov_unit -- one word size of the REMO coverage campaign run by
// tb_mmrfd_coverage: an mmrfd with l = 24, q = 8380417 and word size W, the
// clean and faulty products, the exact flag check and one table row per eta.
// Starts when `go` is high, raises `fin` when done; `checks` and `failures`
// count its comparisons. The fault model is described in tb_mmrfd_coverage.
module tb_mmrfd_cov_unit #(
  parameter int unsigned W     = 4,
  parameter bit          FIRST = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures
);
  import tb_ref_pkg::*;
  localparam int unsigned L = 24, KW = 4, NS = 200;
  localparam longint unsigned Q = 8380417;
  localparam int unsigned ETAS [6] = '{1, 3, 5, 11, 17, 23};

  initial begin
    fin = 1'b0; checks = 0; failures = 0;
  end

  function automatic logic [L-1:0] fault_mask(int eta, bit burst);
    logic [L-1:0] m;
    int p;
    m = '0;
    if (burst) begin
      p = $urandom_range(L - eta);
      for (int b = 0; b < eta; b++) m[p + b] = 1'b1;
    end else begin
      for (int b = 0; b < eta; b++) begin
        do p = $urandom_range(L - 1); while (m[p]);
        m[p] = 1'b1;
      end
    end
    return m;
  endfunction

  localparam int unsigned NW = (L + W - 1) / W;
  logic          start = 0, ready, done, mmrfd_fault;
  logic [L-1:0]  alpha = 0, beta = 0, v;
  logic [NW-1:0] f;
  logic [W-1:0]  bad_aw;
  logic [L-1:0]  bad_b;

  mmrfd #(.L(L), .W(W), .KW(KW), .Q(int'(Q))) u_m (
    .clk(clk), .rst_n(rst_n), .start(start), .alpha(alpha), .beta(beta), .k(KW'(3)),
    .ready(ready), .done(done), .v(v), .f(f), .mmrfd_fault(mmrfd_fault)
  );

  // one product; ma / mb corrupt alpha / beta on the plain path only
  task automatic product(input logic [L-1:0] a, input logic [L-1:0] b,
                         input logic [L-1:0] ma, input logic [L-1:0] mb, output bit flagged);
    longint unsigned exp;
    bit faulty;
    faulty = (ma != 0) || (mb != 0);
    @(negedge clk);
    alpha = a; beta = b; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      if (faulty && u_m.g_en) begin
        bad_aw = W'((a ^ ma) >> (W * u_m.cyc));
        bad_b  = b ^ mb;
        force u_m.aw_g = bad_aw;
        force u_m.u_gamma.beta = bad_b;
      end else if (faulty) begin
        release u_m.aw_g;
        release u_m.u_gamma.beta;
      end
      @(negedge clk);
    end
    release u_m.aw_g;
    release u_m.u_gamma.beta;
    exp = montmul(longint'(a), longint'(b), L, W, Q);
    checks++;
    if (mmrfd_fault != (longint'(v) != exp) || (!faulty && longint'(v) != exp)) begin
      failures++;
      if (failures < 10)
        $display("w=%0d a=%0d b=%0d ma=%h mb=%h: v=%0d exp=%0d fault=%0b",
                 W, a, b, ma, mb, v, exp, mmrfd_fault);
    end
    flagged = mmrfd_fault;
  endtask

  initial begin
    bit fl;
    int hits;
    string line;
    logic [L-1:0] a, b;
    wait (go);
    @(negedge clk);
    for (int t = 0; t < NS; t++) begin
      a = L'($urandom_range(int'(Q) - 1));
      b = L'($urandom_range(int'(Q) - 1));
      product(a, b, '0, '0, fl);
    end
    if (FIRST) begin
      $display("REMO detection (%%), l = %0d, q = %0d, %0d products per cell", L, Q, NS);
      $display(" w eta | alpha rnd alpha bst | omega rnd omega bst | both rnd  both bst");
    end
    for (int e = 0; e < 6; e++) begin
      line = $sformatf("%2d %3d |", W, ETAS[e]);
      for (int tgt = 0; tgt < 3; tgt++)      // 0 alpha, 1 omega, 2 both
        for (int burst = 0; burst < 2; burst++) begin
          if (burst && ETAS[e] == 1) begin
            line = {line, "      -   "};
            continue;
          end
          hits = 0;
          for (int t = 0; t < NS; t++) begin
            a = L'($urandom_range(int'(Q) - 1));
            b = L'($urandom_range(int'(Q) - 1));
            product(a, b, (tgt != 1) ? fault_mask(ETAS[e], 1'(burst)) : '0,
                          (tgt != 0) ? fault_mask(ETAS[e], 1'(burst)) : '0, fl);
            if (fl) hits++;
          end
          line = {line, $sformatf("  %6.2f  ", 100.0 * hits / NS)};
        end
      $display("%s", line);
    end
    fin = 1'b1;
  end
endmodule
