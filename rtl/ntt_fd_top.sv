// ntt_fd_top -- NTT / inverse NTT core with REMO and Memory RC fault detection.
//
// Transforms the n-coefficient polynomial held in the coefficient RAM in
// place. The control unit walks log2(n) stages of n/2 Cooley-Tukey
// butterflies (1024 for n = 256); each butterfly reads two coefficients and a
// twiddle, multiplies with the word-wise Montgomery multiplier mmrfd, and
// writes U+V and U-V back. Two independent checkers run alongside:
//   * REMO inside mmrfd recomputes every product on an operand encoded as
//     aw + K*q and compares mod q -> mmrfd_fault;
//   * the memory rule checker verifies the loop indices of every read
//     against k <= s_i (RAM) and j <= 2^i - 1 (ROM) -> ram_fault, rom_fault,
//     memory_fault.
// fault = mmrfd_fault | memory_fault. The flags are one-clock pulses; the
// *_seen outputs hold them from `start` until the next `start`.
//
// Transforms: omega is a primitive n-th root of unity mod q (17^(256/n) for
// q = 3329).
//   inv = 0, forward: coefficients in natural order; word m of the RAM
//     afterwards holds sum_t a[t] * omega^(t * bitrev(m)) mod q (cyclic NTT,
//     output in bit-reversed order).
//   inv = 1, inverse: takes the forward transform's bit-reversed output and
//     returns n * a[m] mod q in natural order, using omega^-1 twiddles from
//     the upper half of the ROM. The final scaling by n^-1 is left to the
//     block that consumes the result, where it can merge with a constant
//     multiplication.
// Both directions use the same butterfly, checkers and 1024-butterfly walk.
// The paper targets Kyber's NTT but gives a cyclic n-point transform with
// n = 256 and 1024 butterflies; that is what is built. It states that the same
// rules hold for the inverse NTT without giving its data flow; the
// bit-reversed-input walk and the unscaled result are this design's choice.
//
// External port. While the core is idle (busy = 0) the other blocks of the
// cryptosystem reach the RAM through ext_* (read data one clock after
// ext_rd_en). Timing: `start` for one clock while idle, with `inv` valid in the
// same clock; `done` pulses once the last butterfly has been written back.
module ntt_fd_top #(
  parameter int unsigned N     = ntt_pkg::N_DEF,
  parameter int unsigned L     = ntt_pkg::L_DEF,
  parameter int unsigned W     = ntt_pkg::W_DEF,
  parameter int unsigned KW    = ntt_pkg::KW_DEF,
  parameter int unsigned Q     = ntt_pkg::Q_DEF,
  parameter int unsigned K     = ntt_pkg::K_DEF,
  parameter int unsigned OMEGA = ntt_pkg::root_3329(N),
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          inv,
  output logic          busy,
  output logic          done,
  // other-block access to the coefficient RAM
  input  logic          ext_rd_en,
  input  logic [AW-1:0] ext_ra,
  output logic [L-1:0]  ext_rd,
  input  logic          ext_we,
  input  logic [AW-1:0] ext_wa,
  input  logic [L-1:0]  ext_wd,
  // fault detection
  output logic          mmrfd_fault,
  output logic          ram_fault,
  output logic          rom_fault,
  output logic          memory_fault,
  output logic          fault,
  output logic          mmrfd_fault_seen,
  output logic          memory_fault_seen
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned IW   = $clog2(LOGN + 1);

  // index generator
  logic            gen_load, gen_step, gen_first, gen_last;
  logic [IW-1:0]   gi;
  logic [LOGN-1:0] gj, gk, gaddr0, gaddr1;
  logic [LOGN:0]   grom_addr;
  // control
  logic            rd_en, rc_valid, bf_valid;
  logic [AW-1:0]   bf_addr0, bf_addr1;
  logic            sel_ntt;
  // butterfly
  logic            bf_ready, bf_empty, wr_valid;
  logic [AW-1:0]   wr_addr0, wr_addr1;
  logic [L-1:0]    wr_data0, wr_data1;
  // memories
  logic [L-1:0]    ntt_rd0, ntt_rd1, twiddle;
  logic            ram_rd_en, ram_we0, ram_we1;
  logic [AW-1:0]   ram_ra0, ram_ra1, ram_wa0, ram_wa1;
  logic [L-1:0]    ram_rd0, ram_rd1, ram_wd0, ram_wd1;

  ijk_gen #(.N(N)) u_gen (
    .clk(clk), .rst_n(rst_n), .load(gen_load), .step(gen_step), .inv(inv),
    .i(gi), .j(gj), .k(gk), .addr0(gaddr0), .addr1(gaddr1), .rom_addr(grom_addr),
    .first(gen_first), .last(gen_last)
  );

  ctrl_unit #(.N(N)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done), .sel_ntt(sel_ntt),
    .gen_load(gen_load), .gen_step(gen_step), .gen_first(gen_first), .gen_last(gen_last),
    .gen_addr0(gaddr0), .gen_addr1(gaddr1),
    .rd_en(rd_en), .rc_valid(rc_valid),
    .bf_ready(bf_ready), .bf_empty(bf_empty), .bf_valid(bf_valid),
    .bf_addr0(bf_addr0), .bf_addr1(bf_addr1)
  );

  mem_mux #(.N(N), .L(L)) u_mux (
    .clk(clk), .sel_ntt(sel_ntt),
    .ntt_rd_en(rd_en), .ntt_ra0(gaddr0), .ntt_ra1(gaddr1),
    .ntt_rd0(ntt_rd0), .ntt_rd1(ntt_rd1),
    .ntt_we(wr_valid), .ntt_wa0(wr_addr0), .ntt_wd0(wr_data0),
    .ntt_wa1(wr_addr1), .ntt_wd1(wr_data1),
    .ext_rd_en(ext_rd_en), .ext_ra(ext_ra), .ext_rd(ext_rd),
    .ext_we(ext_we), .ext_wa(ext_wa), .ext_wd(ext_wd),
    .ram_rd_en(ram_rd_en), .ram_ra0(ram_ra0), .ram_ra1(ram_ra1),
    .ram_rd0(ram_rd0), .ram_rd1(ram_rd1),
    .ram_we0(ram_we0), .ram_wa0(ram_wa0), .ram_wd0(ram_wd0),
    .ram_we1(ram_we1), .ram_wa1(ram_wa1), .ram_wd1(ram_wd1)
  );

  coeff_ram #(.N(N), .L(L)) u_ram (
    .clk(clk), .rd_en(ram_rd_en), .ra0(ram_ra0), .ra1(ram_ra1),
    .rd0(ram_rd0), .rd1(ram_rd1),
    .we0(ram_we0), .wa0(ram_wa0), .wd0(ram_wd0),
    .we1(ram_we1), .wa1(ram_wa1), .wd1(ram_wd1)
  );

  twiddle_rom #(.N(N), .L(L), .W(W), .Q(Q), .OMEGA(OMEGA)) u_rom (
    .clk(clk), .rd_en(rd_en), .addr(grom_addr), .dout(twiddle)
  );

  ct_bu #(.N(N), .L(L), .W(W), .KW(KW), .Q(Q)) u_bu (
    .clk(clk), .rst_n(rst_n), .k(KW'(K)),
    .in_valid(bf_valid), .in_u(ntt_rd0), .in_a(ntt_rd1), .in_w(twiddle),
    .in_addr0(bf_addr0), .in_addr1(bf_addr1),
    .in_ready(bf_ready), .empty(bf_empty),
    .wr_valid(wr_valid), .wr_addr0(wr_addr0), .wr_addr1(wr_addr1),
    .wr_data0(wr_data0), .wr_data1(wr_data1), .mmrfd_fault(mmrfd_fault)
  );

  memory_rc #(.N(N)) u_rc (
    .clk(clk), .rst_n(rst_n), .valid(rc_valid), .i(gi), .j(gj), .k(gk),
    .ram_fault(ram_fault), .rom_fault(rom_fault), .memory_fault(memory_fault)
  );

  assign fault = mmrfd_fault || memory_fault;

  always_ff @(posedge clk) begin
    if (!rst_n || (start && !busy)) begin
      mmrfd_fault_seen  <= 1'b0;
      memory_fault_seen <= 1'b0;
    end else begin
      if (mmrfd_fault)  mmrfd_fault_seen  <= 1'b1;
      if (memory_fault) memory_fault_seen <= 1'b1;
    end
  end

endmodule
