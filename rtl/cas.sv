// Compare-and-select (CAS) unit of the maximum values filter.
//
// Compares the path metrics of its two Z-bit inputs (metric in the top X1
// bits) and outputs the low x2+1 bits {list index, decoded bit} of the one
// with the larger metric: comp-max raises sel when LR_0 > LR_1 and sel = 1
// selects CI_0, sel = 0 selects CI_1 (so equal metrics give CI_1).
// Combinational. Follows the CAS drawing.
module cas #(
  parameter int unsigned Z  = 17,
  parameter int unsigned X1 = 14
) (
  input  logic [Z-1:0]    si0,
  input  logic [Z-1:0]    si1,
  output logic [Z-X1-1:0] co
);
  logic sel;
  assign sel = si0[Z-1 -: X1] > si1[Z-1 -: X1];
  assign co  = sel ? si0[Z-X1-1:0] : si1[Z-X1-1:0];
endmodule
