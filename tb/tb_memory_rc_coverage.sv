// tb_memory_rc_coverage -- address-fault coverage of the memory rule checker
// over the real index stream of the transform.
//
// The index generator walks a complete transform, forward and then inverse,
// 1024 butterflies each. Every butterfly's indices reach the checker with
// eta bits flipped (eta = 1 .. 7) in:
//   j only (ROM address), k only (RAM address), or both j and k (eta bits in
//   each field),
// in one of two modes:
//   random, eta distinct bit positions of the 8-bit field;
//   burst, eta adjacent bits starting at a random position (eta >= 2).
// For every butterfly the registered ram_fault, rom_fault and memory_fault are
// compared with the rules k <= (n-1) >> (i+1) and j <= 2^i - 1 evaluated here
// on the corrupted indices, and a clean butterfly between the faulty walks
// must raise nothing. The detection rate of each (eta, field, mode) is
// printed as a table. It is the same kind of measurement as the published
// Kyber-768 experiment, on one transform's index stream. How the bits are
// chosen and how "both" splits the flips are this testbench's choices.
module tb_memory_rc_coverage;
  localparam int unsigned N = 256, LOGN = 8, NBF = 1024;
  logic clk = 0, rst_n = 0, load = 0, step = 0, inv = 0;
  logic [3:0] gi;
  logic [7:0] gj, gk, a0, a1;
  logic [8:0] ra;
  logic first, last;
  logic valid = 0;
  logic [7:0] mj = 0, mk = 0, cj, ck;
  logic ram_fault, rom_fault, memory_fault;
  int checks = 0, failures = 0;

  ijk_gen u_gen (.clk(clk), .rst_n(rst_n), .load(load), .step(step), .inv(inv), .i(gi), .j(gj),
                 .k(gk), .addr0(a0), .addr1(a1), .rom_addr(ra), .first(first), .last(last));

  assign cj = gj ^ mj;
  assign ck = gk ^ mk;

  memory_rc u_rc (.clk(clk), .rst_n(rst_n), .valid(valid), .i(gi), .j(cj), .k(ck),
                  .ram_fault(ram_fault), .rom_fault(rom_fault), .memory_fault(memory_fault));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // eta-bit mask over an 8-bit field
  function automatic logic [7:0] fault_mask(int eta, bit burst);
    logic [7:0] m;
    int p;
    m = '0;
    if (burst) begin
      p = $urandom_range(8 - eta);
      for (int b = 0; b < eta; b++) m[p + b] = 1'b1;
    end else begin
      for (int b = 0; b < eta; b++) begin
        do p = $urandom_range(7); while (m[p]);
        m[p] = 1'b1;
      end
    end
    return m;
  endfunction

  // one butterfly: present corrupted indices, check the flags one clock later
  task automatic check_one(input logic [7:0] xj, input logic [7:0] xk, output bit detected);
    logic [3:0] si;
    logic [7:0] sj, sk;
    bit er, eo;
    mj = xj; mk = xk; valid = 1; step = 1;
    si = gi; sj = gj ^ xj; sk = gk ^ xk;
    er = int'(sk) > ((N - 1) >> (int'(si) + 1));
    eo = int'(sj) > ((1 << si) - 1);
    @(negedge clk);
    mj = 0; mk = 0; valid = 0; step = 0;
    checks++;
    if (ram_fault != er || rom_fault != eo || memory_fault != (er || eo)) begin
      failures++;
      if (failures < 10)
        $display("i=%0d j=%0d k=%0d: got ram=%0b rom=%0b mem=%0b exp ram=%0b rom=%0b",
                 si, sj, sk, ram_fault, rom_fault, memory_fault, er, eo);
    end
    detected = memory_fault;
  endtask

  // one full walk with every butterfly corrupted; returns detections
  task automatic walk(input bit dir_inv, input int field, input int eta, input bit burst,
                      output int hits);
    bit d;
    logic [7:0] xj, xk;
    hits = 0;
    @(negedge clk);
    load = 1; inv = dir_inv;
    @(negedge clk);
    load = 0;
    for (int b = 0; b < NBF; b++) begin
      xj = (field != 2) ? fault_mask(eta, burst) : 8'h00;   // 0: both, 1: j, 2: k
      xk = (field != 1) ? fault_mask(eta, burst) : 8'h00;
      check_one(xj, xk, d);
      if (d) hits++;
    end
  endtask

  initial begin
    int hits, tot;
    bit d;
    string fname [3] = '{"j&k", "j", "k"};
    repeat (2) @(negedge clk);
    rst_n = 1;

    // no false alarm on a clean walk in either direction
    for (int dir = 0; dir < 2; dir++) begin
      @(negedge clk);
      load = 1; inv = 1'(dir);
      @(negedge clk);
      load = 0;
      for (int b = 0; b < NBF; b++) begin
        check_one(8'h00, 8'h00, d);
        if (d) begin failures++; $display("false alarm dir %0d butterfly %0d", dir, b); end
      end
    end

    $display("detection rate (%%), forward + inverse walk, %0d faulty butterflies per cell", 2 * NBF);
    $display("eta | j&k random  j&k burst | j random  j burst | k random  k burst");
    for (int eta = 1; eta <= 7; eta++) begin
      string line;
      line = $sformatf("%3d |", eta);
      for (int field = 0; field < 3; field++)
        for (int burst = 0; burst < 2; burst++) begin
          if (burst && eta == 1) begin
            line = {line, "       -   "};
            continue;
          end
          tot = 0;
          for (int dir = 0; dir < 2; dir++) begin
            walk(1'(dir), field, eta, 1'(burst), hits);
            tot += hits;
          end
          line = {line, $sformatf("  %7.2f  ", 100.0 * tot / (2 * NBF))};
          // a flip of every bit of j or k always leaves the bound for some
          // stage, so no cell may be empty
          checks++;
          if (tot == 0) begin failures++; $display("no detection for %s eta %0d", fname[field], eta); end
        end
      $display("%s", line);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
