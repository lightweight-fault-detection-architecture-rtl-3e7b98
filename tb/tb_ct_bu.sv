// tb_ct_bu -- streams random butterflies through the unit as fast as it
// accepts them and checks U+V, U-V mod q (V = A*omega*R^-1 mod q), the
// write-back addresses, the steady-state interval of l/w + 3 = 6 clocks per
// butterfly, and that an upset inside the multiplier reaches mmrfd_fault of
// the same butterfly.
module tb_ct_bu;
  import tb_ref_pkg::*;
  localparam int unsigned N = 256, L = 12, W = 4, KW = 4, Q = 3329, NB = 400;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, empty, wr_valid, mmrfd_fault;
  logic [L-1:0] in_u, in_a, in_w, wr_data0, wr_data1;
  logic [7:0] in_addr0, in_addr1, wr_addr0, wr_addr1;
  int checks = 0, failures = 0;
  longint unsigned eu[NB], ea[NB], ew[NB];
  bit inj[NB];
  int nout = 0, last_t = -1, t = 0, faults_seen = 0;

  ct_bu dut (.clk(clk), .rst_n(rst_n), .k(KW'(3)), .in_valid(in_valid), .in_u(in_u), .in_a(in_a),
             .in_w(in_w), .in_addr0(in_addr0), .in_addr1(in_addr1), .in_ready(in_ready),
             .empty(empty), .wr_valid(wr_valid), .wr_addr0(wr_addr0), .wr_addr1(wr_addr1),
             .wr_data0(wr_data0), .wr_data1(wr_data1), .mmrfd_fault(mmrfd_fault));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    for (int b = 0; b < NB; b++) begin
      eu[b] = $urandom_range(Q - 1); ea[b] = $urandom_range(Q - 1); ew[b] = $urandom_range(1, Q - 1);
      inj[b] = (b % 10 == 5);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_u = L'(eu[b]); in_a = L'(ea[b]); in_w = L'(ew[b]);
      in_addr0 = 8'(b); in_addr1 = 8'(b + 1);
      @(negedge clk);
      in_valid = 0;
      if (inj[b]) begin
        // wait for this butterfly to enter the multiplier, then upset word 0
        while (!(dut.u_mmrfd.busy && dut.u_mmrfd.cyc == 0 && dut.u_mmrfd.beta_p == L'(ew[b])))
          @(negedge clk);
        force dut.u_mmrfd.aw_g = ~W'(ea[b]);
        @(negedge clk);
        release dut.u_mmrfd.aw_g;
      end
    end
  end

  // monitor
  always @(posedge clk) begin
    t++;
    if (rst_n && wr_valid) begin
      longint unsigned v, s, d;
      v = montmul(ea[nout], ew[nout], L, W, Q);
      s = (eu[nout] + v) % Q;
      d = (eu[nout] + Q - v) % Q;
      checks++;
      if (!inj[nout] && (wr_data0 != L'(s) || wr_data1 != L'(d) || mmrfd_fault)) begin
        failures++;
        $display("bf %0d got %0d %0d exp %0d %0d fault %0b", nout, wr_data0, wr_data1, s, d, mmrfd_fault);
      end
      if (inj[nout]) begin
        if (mmrfd_fault) faults_seen++;
        else begin failures++; $display("bf %0d: upset not flagged", nout); end
      end
      checks++;
      if (wr_addr0 != 8'(nout) || wr_addr1 != 8'(nout + 1)) begin
        failures++; $display("bf %0d addr %0d %0d", nout, wr_addr0, wr_addr1);
      end
      if (last_t >= 0 && nout > 1 && !inj[nout] && !inj[nout - 1]) begin
        checks++;
        if (t - last_t != 6) begin failures++; $display("interval %0d", t - last_t); end
      end
      last_t = t;
      nout++;
      if (nout == NB) begin
        @(posedge clk);
        checks++;
        if (!empty) begin failures++; $display("not empty at end"); end
        $display("upsets flagged: %0d", faults_seen);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
