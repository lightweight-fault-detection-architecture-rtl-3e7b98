// ij_rc -- ROM address rule checker ("i-j RC").
//
// The index j of stage i selects the twiddle at ROM address 2^i + j (forward)
// or n + 2^i + j (inverse) and must satisfy j <= 2^i - 1, as the paper
// states. A larger j means the ROM address was corrupted,
// and rom_fault is raised for that check. Combinational; `valid` qualifies.
module ij_rc #(
  parameter int unsigned N = ntt_pkg::N_DEF,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned IW   = $clog2(LOGN + 1)
) (
  input  logic            valid,
  input  logic [IW-1:0]   i,
  input  logic [LOGN-1:0] j,
  output logic            rom_fault
);
  logic [LOGN:0] bound;   // 2^i - 1

  always_comb begin
    bound     = (LOGN+1)'((1 << i) - 1);
    rom_fault = valid && ((LOGN+1)'(j) > bound);
  end

endmodule
