// tb_ctrl_unit -- drives the control unit with the real index generator and
// a model of the butterfly unit (one-entry input buffer, fixed service time,
// random extra stalls). Checks: exactly log2(n)*n/2 reads, no read while one
// is in flight or the buffer is full, no first butterfly of a stage while the
// model still holds work, bf_valid/addresses one clock after each read,
// busy/sel_ntt during the run and a single done pulse after the model drains.
module tb_ctrl_unit;
  localparam int unsigned N = 256;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, sel_ntt, gen_load, gen_step, gen_first, gen_last;
  logic rd_en, rc_valid, bf_ready, bf_empty, bf_valid;
  logic [7:0] gen_addr0, gen_addr1, bf_addr0, bf_addr1, rom_addr, gj, gk;
  logic [3:0] gi;
  int checks = 0, failures = 0, reads = 0, dones = 0, drains = 0;
  // butterfly model
  int hold = 0, inflight = 0;
  bit buf_full = 0;
  logic [7:0] exp_a0, exp_a1;
  bit exp_valid = 0;

  ijk_gen u_gen (.clk(clk), .rst_n(rst_n), .load(gen_load), .step(gen_step), .i(gi), .j(gj), .k(gk),
                 .addr0(gen_addr0), .addr1(gen_addr1), .rom_addr(rom_addr), .first(gen_first),
                 .last(gen_last));
  ctrl_unit dut (.*);

  always #5 clk = ~clk;

  assign bf_ready = !buf_full;
  assign bf_empty = !buf_full && inflight == 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    // checks on this clock's outputs
    if (rd_en) begin
      reads++;
      checks++;
      if (!bf_ready || bf_valid || (gen_first && !bf_empty) || !sel_ntt || !rc_valid) begin
        failures++; $display("illegal read at read %0d", reads);
      end
      if (gen_first && reads > 1) drains++;
    end
    if (exp_valid) begin
      checks++;
      if (!bf_valid || bf_addr0 != exp_a0 || bf_addr1 != exp_a1) begin
        failures++; $display("bf_valid/address mismatch");
      end
    end else if (bf_valid) begin
      failures++; $display("spurious bf_valid");
    end
    exp_valid <= rd_en; exp_a0 <= gen_addr0; exp_a1 <= gen_addr1;
    // model: buffer -> service (6 clocks + random stall)
    if (hold > 0) hold <= hold - 1;
    if (hold == 1) inflight <= 0;
    if (buf_full && hold == 0 && inflight == 0) begin
      buf_full <= 0; inflight <= 1; hold <= 6 + $urandom_range(3);
    end
    if (bf_valid) buf_full <= 1;
    if (done) begin
      dones++;
      checks++;
      if (reads != 1024 || buf_full || inflight != 0) begin
        failures++; $display("done with reads=%0d", reads);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (busy || sel_ntt) failures++;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += 3;
    if (dones != 1) begin failures++; $display("dones %0d", dones); end
    if (busy) failures++;
    if (drains != 7) begin failures++; $display("stage drains %0d", drains); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
