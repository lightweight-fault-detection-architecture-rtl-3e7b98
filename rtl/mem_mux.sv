// mem_mux -- memory port multiplexers and read-data demultiplexer.
//
// The coefficient RAM is shared between the NTT and the other blocks of the
// surrounding cryptosystem (polynomial multiplier, adder, load/unload). While
// `sel_ntt` is high the NTT drives the RAM's addresses, enables and write data;
// otherwise the external port does (it uses read port 0 and write port 0).
// The demultiplexer routes read data back to whichever side issued the read:
// the select is delayed by one clock to match the RAM's read latency, and the
// side not selected sees zero. The control unit drives `sel_ntt`.
module mem_mux #(
  parameter int unsigned N = ntt_pkg::N_DEF,
  parameter int unsigned L = ntt_pkg::L_DEF,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          sel_ntt,
  // NTT side
  input  logic          ntt_rd_en,
  input  logic [AW-1:0] ntt_ra0,
  input  logic [AW-1:0] ntt_ra1,
  output logic [L-1:0]  ntt_rd0,
  output logic [L-1:0]  ntt_rd1,
  input  logic          ntt_we,
  input  logic [AW-1:0] ntt_wa0,
  input  logic [L-1:0]  ntt_wd0,
  input  logic [AW-1:0] ntt_wa1,
  input  logic [L-1:0]  ntt_wd1,
  // other-block side
  input  logic          ext_rd_en,
  input  logic [AW-1:0] ext_ra,
  output logic [L-1:0]  ext_rd,
  input  logic          ext_we,
  input  logic [AW-1:0] ext_wa,
  input  logic [L-1:0]  ext_wd,
  // RAM side
  output logic          ram_rd_en,
  output logic [AW-1:0] ram_ra0,
  output logic [AW-1:0] ram_ra1,
  input  logic [L-1:0]  ram_rd0,
  input  logic [L-1:0]  ram_rd1,
  output logic          ram_we0,
  output logic [AW-1:0] ram_wa0,
  output logic [L-1:0]  ram_wd0,
  output logic          ram_we1,
  output logic [AW-1:0] ram_wa1,
  output logic [L-1:0]  ram_wd1
);
  logic sel_q;

  always_ff @(posedge clk) sel_q <= sel_ntt;

  always_comb begin
    // muxes
    ram_rd_en = sel_ntt ? ntt_rd_en : ext_rd_en;
    ram_ra0   = sel_ntt ? ntt_ra0   : ext_ra;
    ram_ra1   = sel_ntt ? ntt_ra1   : ext_ra;
    ram_we0   = sel_ntt ? ntt_we    : ext_we;
    ram_wa0   = sel_ntt ? ntt_wa0   : ext_wa;
    ram_wd0   = sel_ntt ? ntt_wd0   : ext_wd;
    ram_we1   = sel_ntt && ntt_we;
    ram_wa1   = ntt_wa1;
    ram_wd1   = ntt_wd1;
    // demux
    ntt_rd0   = sel_q ? ram_rd0 : '0;
    ntt_rd1   = sel_q ? ram_rd1 : '0;
    ext_rd    = sel_q ? '0 : ram_rd0;
  end

endmodule
