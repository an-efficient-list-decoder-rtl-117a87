// Two-input sorter of the bitonic sequence generator: the increase-order
// sorter (IS, DESC = 0) or the decrease-order sorter (DESC = 1).
//
// Each input SI_k = {LR_k, index, bit} is Z bits wide with the path metric
// LR_k in the top X1 bits. IS: a comp-max unit raises sel when LR_0 > LR_1
// and the two inputs are swapped, so LR_0' <= LR_1'. DS: a comp-min unit
// raises sel when LR_0 < LR_1, so LR_0' >= LR_1'. Equal metrics pass
// straight through. Combinational. Follows the IS/DS drawings.
module sorter2 #(
  parameter int unsigned Z    = 17,  // x1 + x2 + 1
  parameter int unsigned X1   = 14,  // metric width
  parameter bit          DESC = 1'b0
) (
  input  logic [Z-1:0] si0,
  input  logic [Z-1:0] si1,
  output logic [Z-1:0] so0,
  output logic [Z-1:0] so1
);
  logic [X1-1:0] lr0, lr1;
  logic          sel;

  assign lr0 = si0[Z-1 -: X1];
  assign lr1 = si1[Z-1 -: X1];
  assign sel = DESC ? (lr0 < lr1) : (lr0 > lr1);
  assign so0 = sel ? si1 : si0;
  assign so1 = sel ? si0 : si1;
endmodule
