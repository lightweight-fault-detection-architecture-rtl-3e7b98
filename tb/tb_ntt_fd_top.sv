// tb_ntt_fd_top -- end-to-end test of the NTT core at its default size
// (n = 256, q = 3329, l = 12, w = 4).
//
// Runs five transforms through the external RAM port:
//   1. clean forward: random polynomial in, transform, result out; every word
//      is compared with sum_t a[t] * 17^(t * bitrev(m)) mod 3329 and no fault
//      flag may rise; the clock count must be 6 per butterfly plus the
//      per-stage drains;
//   1b. clean inverse on that result: every word must come back as
//      n * a[m] mod 3329, in natural order, with no fault flag;
//   2. a one-clock upset of a word inside the REMO-protected multiplier
//      -> mmrfd_fault and fault, no memory fault;
//   3. a corrupted butterfly index k (RAM address) -> ram_fault;
//   4. a corrupted group index j (ROM address) -> rom_fault.
// It counts how often each mechanism occurred -- external loads and reads,
// forward and inverse runs,
// multiplier stalls of the butterfly buffer, stage drains, each fault flag --
// and counts a failure for any that never occurred.
module tb_ntt_fd_top;
  import tb_ref_pkg::*;
  localparam int unsigned N = 256, L = 12, Q = 3329, LOGN = 8, NBF = 1024;
  logic clk = 0, rst_n = 0, start = 0, inv = 0;
  logic busy, done;
  logic ext_rd_en = 0, ext_we = 0;
  logic [7:0] ext_ra = 0, ext_wa = 0;
  logic [L-1:0] ext_rd, ext_wd = 0;
  logic mmrfd_fault, ram_fault, rom_fault, memory_fault, fault, mmrfd_fault_seen, memory_fault_seen;
  int checks = 0, failures = 0;
  int n_load = 0, n_read = 0, n_stall = 0, n_drain = 0, n_fwd = 0, n_inv = 0;
  int n_mmrfd = 0, n_ram = 0, n_rom = 0, n_mem = 0, n_fault = 0;
  longint unsigned a [N];

  ntt_fd_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.u_bu.s1_valid && !dut.u_bu.m_ready) n_stall++;
    if (dut.busy && !dut.u_ctrl.gen_load && dut.gen_first && !dut.bf_empty) n_drain++;
    if (mmrfd_fault)  n_mmrfd++;
    if (ram_fault)    n_ram++;
    if (rom_fault)    n_rom++;
    if (memory_fault) n_mem++;
    if (fault)        n_fault++;
  end

  task automatic load_poly();
    for (int t = 0; t < N; t++) begin
      a[t] = $urandom_range(Q - 1);
      @(negedge clk);
      ext_we = 1; ext_wa = 8'(t); ext_wd = L'(a[t]);
      n_load++;
    end
    @(negedge clk);
    ext_we = 0;
  endtask

  task automatic start_ntt(input bit dir_inv = 1'b0);
    @(negedge clk);
    start = 1; inv = dir_inv;
    if (dir_inv) n_inv++; else n_fwd++;
    @(negedge clk);
    start = 0; inv = !dir_inv;   // inv only matters with start
  endtask

  task automatic wait_done(output int cycles);
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  task automatic check_result();
    longint unsigned w, acc, e;
    w = 17;
    for (int m = 0; m < N; m++) begin
      @(negedge clk);
      ext_rd_en = 1; ext_ra = 8'(m);
      @(negedge clk);
      ext_rd_en = 0;
      n_read++;
      e = longint'(brev(m, LOGN));
      acc = 0;
      for (int t = 0; t < N; t++)
        acc = (acc + mulmod(a[t], powmod(w, (longint'(t) * e) % N, Q), Q)) % Q;
      checks++;
      if (ext_rd != L'(acc)) begin
        failures++;
        if (failures < 10) $display("word %0d got %0d exp %0d", m, ext_rd, acc);
      end
    end
  endtask

  task automatic check_inverse();
    for (int m = 0; m < N; m++) begin
      @(negedge clk);
      ext_rd_en = 1; ext_ra = 8'(m);
      @(negedge clk);
      ext_rd_en = 0;
      n_read++;
      checks++;
      if (ext_rd != L'(mulmod(a[m], N, Q))) begin
        failures++;
        if (failures < 10) $display("inverse word %0d got %0d exp %0d", m, ext_rd, mulmod(a[m], N, Q));
      end
    end
  endtask

  initial begin
    int cyc;
    logic [3:0] bad_w;
    logic [7:0] bad_i;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. clean transform
    load_poly();
    start_ntt();
    checks++;
    if (!busy) begin failures++; $display("not busy after start"); end
    wait_done(cyc);
    $display("clean transform: %0d clocks for %0d butterflies", cyc, NBF);
    checks++;
    if (cyc < 6 * NBF || cyc > 6 * NBF + 12 * LOGN + 10) begin
      failures++; $display("unexpected clock count %0d", cyc);
    end
    checks++;
    if (mmrfd_fault_seen || memory_fault_seen || n_fault != 0) begin
      failures++; $display("false alarm");
    end
    check_result();

    // 1b. clean inverse of the forward result
    start_ntt(1'b1);
    wait_done(cyc);
    $display("clean inverse: %0d clocks", cyc);
    checks += 2;
    if (cyc < 6 * NBF || cyc > 6 * NBF + 12 * LOGN + 10) begin
      failures++; $display("unexpected clock count %0d", cyc);
    end
    if (mmrfd_fault_seen || memory_fault_seen || n_fault != 0) begin
      failures++; $display("false alarm in inverse");
    end
    check_inverse();

    // 2. REMO: upset one word on the plain multiplier path
    load_poly();
    start_ntt();
    repeat (300) @(negedge clk);
    while (!(dut.u_bu.u_mmrfd.busy && dut.u_bu.u_mmrfd.cyc == 1 && dut.u_bu.u_mmrfd.beta_p != 0))
      @(negedge clk);
    bad_w = ~dut.u_bu.u_mmrfd.aw_g;
    force dut.u_bu.u_mmrfd.aw_g = bad_w;
    @(negedge clk);
    release dut.u_bu.u_mmrfd.aw_g;
    wait_done(cyc);
    checks += 2;
    if (!mmrfd_fault_seen) begin failures++; $display("REMO missed the upset"); end
    if (memory_fault_seen) begin failures++; $display("memory false alarm"); end

    // 3. RAM address: corrupt k in stage 3 (k <= 15 there) by setting bit 6
    start_ntt();
    while (!(dut.gi == 3 && dut.rd_en)) @(negedge clk);
    bad_i = dut.u_gen.k | 8'h40;
    force dut.u_gen.k = bad_i;
    @(negedge clk);
    release dut.u_gen.k;
    wait_done(cyc);
    checks++;
    if (!memory_fault_seen || n_ram == 0) begin failures++; $display("i-k checker missed"); end

    // 4. ROM address: corrupt j in stage 6 (j <= 63 there) by setting bit 7
    start_ntt();
    while (!(dut.gi == 6 && dut.rd_en)) @(negedge clk);
    bad_i = dut.u_gen.j | 8'h80;
    force dut.u_gen.j = bad_i;
    @(negedge clk);
    release dut.u_gen.j;
    wait_done(cyc);
    checks++;
    if (!memory_fault_seen || n_rom == 0) begin failures++; $display("i-j checker missed"); end

    $display("runs: forward=%0d inverse=%0d", n_fwd, n_inv);
    $display("mechanisms: loads=%0d reads=%0d stalls=%0d drains=%0d mmrfd=%0d ram=%0d rom=%0d memory=%0d fault=%0d",
             n_load, n_read, n_stall, n_drain, n_mmrfd, n_ram, n_rom, n_mem, n_fault);
    checks += 11;
    if (n_fwd == 0)   begin failures++; $display("no forward run"); end
    if (n_inv == 0)   begin failures++; $display("no inverse run"); end
    if (n_load == 0)  begin failures++; $display("no external load"); end
    if (n_read == 0)  begin failures++; $display("no external read"); end
    if (n_stall == 0) begin failures++; $display("no stall"); end
    if (n_drain == 0) begin failures++; $display("no drain"); end
    if (n_mmrfd == 0) begin failures++; $display("no mmrfd_fault"); end
    if (n_ram == 0)   begin failures++; $display("no ram_fault"); end
    if (n_rom == 0)   begin failures++; $display("no rom_fault"); end
    if (n_mem == 0)   begin failures++; $display("no memory_fault"); end
    if (n_fault == 0) begin failures++; $display("no fault"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
