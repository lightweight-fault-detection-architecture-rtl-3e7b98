// memory_rc -- Memory Rule Checker ("memory RC").
//
// Runs the i-k checker (RAM addresses) and the i-j checker (ROM addresses) on
// the indices of every butterfly the controller issues, and registers their
// flags: ram_fault, rom_fault and memory_fault = ram_fault | rom_fault appear
// one clock after the checked issue. The register stage is this design's
// choice; it keeps the checkers off the address path.
module memory_rc #(
  parameter int unsigned N = ntt_pkg::N_DEF,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned IW   = $clog2(LOGN + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            valid,
  input  logic [IW-1:0]   i,
  input  logic [LOGN-1:0] j,
  input  logic [LOGN-1:0] k,
  output logic            ram_fault,
  output logic            rom_fault,
  output logic            memory_fault
);
  logic ram_f, rom_f;

  ik_rc #(.N(N)) u_ik (.valid(valid), .i(i), .k(k), .ram_fault(ram_f));
  ij_rc #(.N(N)) u_ij (.valid(valid), .i(i), .j(j), .rom_fault(rom_f));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ram_fault    <= 1'b0;
      rom_fault    <= 1'b0;
      memory_fault <= 1'b0;
    end else begin
      ram_fault    <= ram_f;
      rom_fault    <= rom_f;
      memory_fault <= ram_f || rom_f;
    end
  end

endmodule
