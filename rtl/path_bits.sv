// Store of decided data bits, one row per path slot.
//
// The output codeword must be read from the surviving path at the end, so
// each slot keeps the KD = K - h data bits decided so far. When a data bit is
// committed, row l becomes row a_l shifted right by one with c_l entering at
// the top, so after all KD data bits row l holds bit j (the j-th decided
// data bit) at position j. CRC bits are not stored. Registers update on the
// rising edge when step = 1. This block is not described in the paper (it
// only needs the decoded word of the chosen path); this is the plainest
// register form of it.
module path_bits
  import polar_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned KD    = K_DEF - H_DEF,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic                 clk,
  input  logic                 step,
  input  logic [L-1:0][LW-1:0] a,
  input  logic [L-1:0]         c,
  output logic [L-1:0][KD-1:0] bits
);
  always_ff @(posedge clk)
    if (step)
      for (int l = 0; l < L; l++) bits[l] <= {c[l], bits[a[l]][KD-1:1]};
endmodule
