// tb_memory_rc -- random indices, legal and corrupted: the registered flags
// must follow one clock after each check with memory_fault = ram | rom.
module tb_memory_rc;
  localparam int unsigned N = 256, LOGN = 8;
  logic clk = 0, rst_n = 0, valid = 0;
  logic [3:0] i;
  logic [7:0] j, k;
  logic ram_fault, rom_fault, memory_fault;
  int checks = 0, failures = 0, n_ram = 0, n_rom = 0;

  memory_rc dut (.clk(clk), .rst_n(rst_n), .valid(valid), .i(i), .j(j), .k(k),
                 .ram_fault(ram_fault), .rom_fault(rom_fault), .memory_fault(memory_fault));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit er, eo;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int si;
      si = $urandom_range(LOGN - 1);
      valid = 1'($urandom_range(3) != 0);
      i = 4'(si);
      j = 8'($urandom_range((1 << si) - 1));
      k = 8'($urandom_range((N >> (si + 1)) - 1));
      if (t % 3 == 1) j = j ^ 8'(1 << $urandom_range(7));   // one-bit address upsets
      if (t % 3 == 2) k = k ^ 8'(1 << $urandom_range(7));
      er = valid && (int'(k) >= (N >> (si + 1)));
      eo = valid && (int'(j) >= (1 << si));
      @(negedge clk);
      checks++;
      if (ram_fault != er || rom_fault != eo || memory_fault != (er || eo)) begin
        failures++;
        $display("i=%0d j=%0d k=%0d got %0b%0b%0b", si, j, k, ram_fault, rom_fault, memory_fault);
      end
      n_ram += int'(er); n_rom += int'(eo);
    end
    checks++;
    if (n_ram == 0 || n_rom == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
