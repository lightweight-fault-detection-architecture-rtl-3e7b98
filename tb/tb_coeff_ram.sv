// tb_coeff_ram -- random dual writes and dual reads against an array model,
// including read-old-data on a same-clock write and port-1 priority.
module tb_coeff_ram;
  localparam int unsigned N = 256, L = 12;
  logic clk = 0, rd_en = 0, we0 = 0, we1 = 0;
  logic [7:0] ra0, ra1, wa0, wa1;
  logic [L-1:0] rd0, rd1, wd0, wd1;
  logic [L-1:0] model [N];
  int checks = 0, failures = 0;

  coeff_ram dut (.clk(clk), .rd_en(rd_en), .ra0(ra0), .ra1(ra1), .rd0(rd0), .rd1(rd1),
                 .we0(we0), .wa0(wa0), .wd0(wd0), .we1(we1), .wa1(wa1), .wd1(wd1));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [L-1:0] e0, e1;
    // fill
    for (int a = 0; a < N; a += 2) begin
      @(negedge clk);
      we0 = 1; wa0 = 8'(a); wd0 = L'($urandom); we1 = 1; wa1 = 8'(a + 1); wd1 = L'($urandom);
      model[a] = wd0; model[a + 1] = wd1;
    end
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      ra0 = 8'($urandom); ra1 = 8'($urandom); rd_en = 1;
      e0 = model[ra0]; e1 = model[ra1];
      we0 = 1'($urandom); wa0 = 8'($urandom); wd0 = L'($urandom);
      we1 = 1'($urandom); wa1 = (t % 7 == 0) ? wa0 : 8'($urandom); wd1 = L'($urandom);
      if (we0) model[wa0] = wd0;
      if (we1) model[wa1] = wd1;
      @(negedge clk);
      we0 = 0; we1 = 0; rd_en = 0;
      checks += 2;
      if (rd0 != e0) begin failures++; $display("rd0 %0h exp %0h", rd0, e0); end
      if (rd1 != e1) begin failures++; $display("rd1 %0h exp %0h", rd1, e1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
