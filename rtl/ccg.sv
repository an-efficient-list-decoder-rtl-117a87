// Crossbar control signal generator (CCG) with the lazy-copy reference
// indices.
//
// Register R_l[lambda] (lambda = 0..n-1) holds r_l[lambda]: the path whose
// stored stage-lambda LLMs path l must use. During the round of bit i the
// update unit U_{l,lambda} forms
//   w_{l,lambda} = R_{a_l}[lambda]  if lambda < phi(i),   else l,
// where a_l is the path that slot l continued at the previous decision
// (lazy copy: references are copied, not LLMs). While stage lambda is
// computed, the MUX array outputs cc_l = w_{l,lambda-1} to the crossbar.
// When the round ends (commit), every R_l[lambda] takes w_{l,lambda}; init
// clears all to 0. The registers are the update units of the CCG drawing;
// R_l[0] is kept though it only ever holds 0, as there.
module ccg
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned L     = L_DEF,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned SW   = $clog2(N_LOG + 1)
) (
  input  logic                        clk,
  input  logic                        init,    // clear all references
  input  logic                        commit,  // end of a round: R <= w
  input  logic [L-1:0][LW-1:0]        a,       // previous decision
  input  logic [SW-1:0]               phi_i,   // phi of the current bit
  input  logic [SW-1:0]               lam,     // stage being computed, 1..n
  output logic [L-1:0][LW-1:0]        cc
);
  logic [L-1:0][N_LOG-1:0][LW-1:0] r, w;

  always_comb begin
    for (int l = 0; l < L; l++)
      for (int s = 0; s < N_LOG; s++)
        w[l][s] = (SW'(s) < phi_i) ? r[a[l]][s] : LW'(l);
    for (int l = 0; l < L; l++)
      cc[l] = (lam >= 1 && lam <= SW'(N_LOG)) ? w[l][lam - 1'b1] : LW'(l);
  end

  always_ff @(posedge clk) begin
    if (init) r <= '0;
    else if (commit) r <= w;
  end
endmodule
