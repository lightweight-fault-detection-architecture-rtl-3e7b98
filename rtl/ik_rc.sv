// ik_rc -- RAM address rule checker ("i-k RC").
//
// The index k of stage i (butterfly within the group in the forward walk,
// block in the inverse walk) can never exceed s_i = (n-1) >> (i+1)
// (the paper: s_i starts at n-1 and loses one bit per stage). A k above the
// bound means the RAM address was corrupted, and ram_fault is raised for that
// check. Combinational; `valid` qualifies the check.
module ik_rc #(
  parameter int unsigned N = ntt_pkg::N_DEF,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned IW   = $clog2(LOGN + 1)
) (
  input  logic            valid,
  input  logic [IW-1:0]   i,
  input  logic [LOGN-1:0] k,
  output logic            ram_fault
);
  logic [LOGN-1:0] s_i;

  always_comb begin
    s_i       = LOGN'((N - 1) >> (32'(i) + 1));
    ram_fault = valid && (k > s_i);
  end

endmodule
