// Crossbar (CB): L-to-1 multiplexers that hand PUA_l the LLMs of path cc_l.
//
// With lazy copying a path does not own a full copy of its LLMs: the
// reference index r_l[lambda-1] (provided by the CCG as cc_l) says which
// path's part of the L-MEM word holds the inputs of stage lambda for path
// l. Output part l is input part cc[l]. Combinational.
module crossbar
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned Q     = Q_DEF,
  localparam int unsigned W    = Q + N_LOG,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic [L-1:0][2*T-1:0][1:0][W-1:0] din,
  input  logic [L-1:0][LW-1:0]              cc,
  output logic [L-1:0][2*T-1:0][1:0][W-1:0] dout
);
  always_comb
    for (int l = 0; l < L; l++) dout[l] = din[cc[l]];
endmodule
