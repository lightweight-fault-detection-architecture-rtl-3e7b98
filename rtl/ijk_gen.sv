// ijk_gen -- loop index generator of the NTT ("i-j-k Gen").
//
// Walks a transform as log2(n) stages of n/2 butterflies
// (n = 256: 8 x 128 = 1024 butterflies). In both directions
//   i  stage, 0 .. log2(n)-1
//   j  0 .. 2^i - 1, selects the twiddle
//   k  0 .. (n >> (i+1)) - 1
// with k counting fastest, and j, k mapped to the memory addresses as:
//   forward (natural-order input, bit-reversed output), len = n >> (i+1):
//     j is the group, k the butterfly inside it
//     addr0 = j * 2*len + k   (alpha[j+k] in the paper's naming)
//     addr1 = addr0 + len     (alpha[j+k+i/2])
//     rom_addr = 2^i + j
//   inverse (bit-reversed input, natural output), span 2^i:
//     j is the twiddle index, k the block
//     addr0 = k * 2^(i+1) + j, addr1 = addr0 + 2^i
//     rom_addr = n + 2^i + j
// The same i, j, k feed the address rule checkers, and both walks keep to the
// paper's rules k <= (n-1) >> (i+1) and j <= 2^i - 1. The nesting order and
// the address formulas are this design's choice; the paper's loop listing is
// written for a different index convention.
//
// `load` restarts at i = j = k = 0 and samples `inv` (1 = inverse walk); `step`
// advances by one butterfly. `first` marks the first butterfly of a stage,
// `last` the final butterfly of the transform. Indices change on the clock
// edge that samples `step`.
module ijk_gen #(
  parameter int unsigned N = ntt_pkg::N_DEF,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned IW   = $clog2(LOGN + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic            step,
  input  logic            inv,
  output logic [IW-1:0]   i,
  output logic [LOGN-1:0] j,
  output logic [LOGN-1:0] k,
  output logic [LOGN-1:0] addr0,
  output logic [LOGN-1:0] addr1,
  output logic [LOGN:0]   rom_addr,
  output logic            first,
  output logic            last
);
  logic [LOGN-1:0] len;      // n >> (i+1)
  logic [LOGN-1:0] jmax;     // 2^i - 1
  logic            k_end, j_end, i_end;
  logic            mode_inv; // walk direction, sampled on load

  always_comb begin
    len      = LOGN'(N >> (32'(i) + 1));
    jmax     = LOGN'((1 << i) - 1);
    k_end    = (k == len - LOGN'(1));
    j_end    = (j == jmax);
    i_end    = (32'(i) == LOGN - 1);
    if (mode_inv) begin
      addr0 = LOGN'((32'(k) << (32'(i) + 1)) + 32'(j));
      addr1 = addr0 + LOGN'(1 << i);
    end else begin
      addr0 = LOGN'((32'(j) << (LOGN - 32'(i))) + 32'(k));
      addr1 = addr0 + len;
    end
    rom_addr = {mode_inv, LOGN'((1 << i) + 32'(j))};
    first    = (j == '0) && (k == '0);
    last     = k_end && j_end && i_end;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)    mode_inv <= 1'b0;
    else if (load) mode_inv <= inv;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || load) begin
      i <= '0;
      j <= '0;
      k <= '0;
    end else if (step && !last) begin
      if (!k_end) begin
        k <= k + LOGN'(1);
      end else begin
        k <= '0;
        if (!j_end) begin
          j <= j + LOGN'(1);
        end else begin
          j <= '0;
          i <= i + IW'(1);
        end
      end
    end
  end

endmodule
