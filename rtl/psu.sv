// Partial sum update unit (PSU_0 .. PSU_{L-1}).
//
// The G operation at stage lambda needs the 2^(n-lambda) partial sums
// C_{l,lambda}[k][0] of the block of bits just decided. PSU_l keeps only
// N/2 - 1 bit registers: stage j (j = n..2) has 2^(n-j) registers holding
// the polar transform of the last completed left-hand block of 2^(n-j) bits.
// The partial sums are formed combinationally from those registers and the
// latest decision c_l:
//   b_{l,n}     = c_l
//   b_{l,j-1}   = interleave(R_j XOR b_{l,j}, b_{l,j})   j = n..2
// i.e. b_{l,j-1}[2k] = R_j[k] ^ b_{l,j}[k], b_{l,j-1}[2k+1] = b_{l,j}[k].
// R_j is the register set of path a_l (switch network SW), as slot l
// continues path a_l. When decision m is committed, stage n loads c_l and
// stage j < n loads b_{l,j} if 2^(n-j) divides m+1 (a left-hand block has
// just been completed), otherwise it copies path a_l's value.
// Outputs: u[l][j] = b_{l,lam}[kcyc*T + j], the partial sum for PU j of
// PUA_l in cycle kcyc of stage lam. Registers on the rising edge; u is
// combinational. Structure follows the PSU drawing (shown for N = 8); the
// update rule is derived from the partial-sum recursion of the algorithm.
module psu
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned T     = T_DEF,
  localparam int unsigned N    = 1 << N_LOG,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned SW   = $clog2(N_LOG + 1)
) (
  input  logic                 clk,
  input  logic                 init,
  input  logic                 commit,   // commit decision of bit m
  input  logic [N_LOG-1:0]     m,
  input  logic [L-1:0][LW-1:0] a,        // decision: slot l continues path a_l
  input  logic [L-1:0]         c,        //           with bit c_l
  input  logic [SW-1:0]        lam,      // stage in G mode, 1..n
  input  logic [N_LOG-1:0]     kcyc,     // cycle within the stage
  output logic [L-1:0][T-1:0]  u
);
  logic [L-1:0][N/2-2:0] r;       // registers, stage j at offset 2^(n-j)-1
  logic [L-1:0][N-2:0]   b;       // b_{l,lambda} at offset 2^(n-lambda)-1
  logic [N_LOG:0]        m1;

  assign m1 = {1'b0, m} + 1'b1;

  always_comb begin
    for (int l = 0; l < L; l++) begin
      b[l] = '0;
      b[l][0] = c[l];
      for (int j = N_LOG; j >= 2; j--)
        for (int k = 0; k < (1 << (N_LOG - j)); k++) begin
          b[l][(1 << (N_LOG - j + 1)) - 1 + 2 * k] =
            r[a[l]][(1 << (N_LOG - j)) - 1 + k] ^ b[l][(1 << (N_LOG - j)) - 1 + k];
          b[l][(1 << (N_LOG - j + 1)) - 1 + 2 * k + 1] = b[l][(1 << (N_LOG - j)) - 1 + k];
        end
    end
  end

  always_comb
    for (int l = 0; l < L; l++)
      for (int j = 0; j < T; j++) begin
        int unsigned sz, idx;
        sz  = (lam >= 1 && lam <= SW'(N_LOG)) ? (1 << (N_LOG - int'(lam))) : 0;
        idx = int'(kcyc) * T + j;
        u[l][j] = (idx < sz) ? b[l][sz - 1 + idx] : 1'b0;
      end

  always_ff @(posedge clk) begin
    if (init) r <= '0;
    else if (commit)
      for (int l = 0; l < L; l++) begin
        r[l][0] <= c[l];
        for (int j = 2; j < N_LOG; j++)
          for (int k = 0; k < (1 << (N_LOG - j)); k++)
            r[l][(1 << (N_LOG - j)) - 1 + k] <=
              ((m1 & ((N_LOG+1)'(1 << (N_LOG - j)) - 1'b1)) == 0)
                ? b[l][(1 << (N_LOG - j)) - 1 + k]
                : r[a[l]][(1 << (N_LOG - j)) - 1 + k];
      end
  end
endmodule
