// tb_mem_mux -- random traffic on both sides: the RAM must see the selected
// side's address, enables and data, and read data must return, one clock
// later, only to the side that was selected when the read was issued.
module tb_mem_mux;
  localparam int unsigned L = 12;
  logic clk = 0, sel_ntt;
  logic ntt_rd_en, ntt_we, ext_rd_en, ext_we;
  logic [7:0] ntt_ra0, ntt_ra1, ntt_wa0, ntt_wa1, ext_ra, ext_wa;
  logic [L-1:0] ntt_rd0, ntt_rd1, ntt_wd0, ntt_wd1, ext_rd, ext_wd;
  logic ram_rd_en, ram_we0, ram_we1;
  logic [7:0] ram_ra0, ram_ra1, ram_wa0, ram_wa1;
  logic [L-1:0] ram_rd0, ram_rd1, ram_wd0, ram_wd1;
  int checks = 0, failures = 0;

  mem_mux dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit prev_sel;
    prev_sel = 0;
    sel_ntt = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      prev_sel = sel_ntt;
      sel_ntt = 1'($urandom);
      {ntt_rd_en, ntt_we, ext_rd_en, ext_we} = 4'($urandom);
      ntt_ra0 = 8'($urandom); ntt_ra1 = 8'($urandom); ntt_wa0 = 8'($urandom); ntt_wa1 = 8'($urandom);
      ext_ra = 8'($urandom); ext_wa = 8'($urandom);
      ntt_wd0 = L'($urandom); ntt_wd1 = L'($urandom); ext_wd = L'($urandom);
      ram_rd0 = L'($urandom); ram_rd1 = L'($urandom);
      #1;
      checks++;
      if (sel_ntt) begin
        if (ram_rd_en != ntt_rd_en || ram_ra0 != ntt_ra0 || ram_ra1 != ntt_ra1 ||
            ram_we0 != ntt_we || ram_wa0 != ntt_wa0 || ram_wd0 != ntt_wd0 ||
            ram_we1 != ntt_we || ram_wa1 != ntt_wa1 || ram_wd1 != ntt_wd1) begin
          failures++; $display("ntt side not routed at %0d", t);
        end
      end else begin
        if (ram_rd_en != ext_rd_en || ram_ra0 != ext_ra || ram_we0 != ext_we ||
            ram_wa0 != ext_wa || ram_wd0 != ext_wd || ram_we1) begin
          failures++; $display("ext side not routed at %0d", t);
        end
      end
      // demux follows the select of the previous clock
      checks++;
      if (t > 0 && (prev_sel ? (ntt_rd0 != ram_rd0 || ntt_rd1 != ram_rd1 || ext_rd != 0)
                             : (ext_rd != ram_rd0 || ntt_rd0 != 0 || ntt_rd1 != 0))) begin
        failures++; $display("demux wrong at %0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
