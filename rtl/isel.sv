// Input selection in front of the crossbar: csel, bsel and ISel.
//
// csel picks the decompressed channel word when stage 1 is computed (the
// channel LLMs are shared, so the one word is copied into every path's
// part, widened from t to W bits); otherwise it picks the L-MEM read data.
// bsel then picks the bypass buffer rBUF instead, when the word the
// controller reads was written into L-MEM in the cycle the read was issued
// (the late stages live in one word each and are read right after being
// written). The result is a full word in the uniform bus format, handed to
// the crossbar. Combinational; both selects come from the controller.
module isel
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned Q     = Q_DEF,
  localparam int unsigned W    = Q + N_LOG
) (
  input  logic [2*T-1:0][1:0][Q-1:0]        ch,     // decompressed channel word
  input  logic [L-1:0][2*T-1:0][1:0][W-1:0] dout,   // L-MEM read data
  input  logic [L-1:0][2*T-1:0][1:0][W-1:0] rbuf,   // bypass buffer
  input  logic                              csel,   // 1: channel
  input  logic                              bsel,   // 1: bypass (ignored when csel)
  output logic [L-1:0][2*T-1:0][1:0][W-1:0] word
);
  always_comb begin
    if (csel) begin
      for (int l = 0; l < L; l++)
        for (int e = 0; e < 2 * T; e++)
          for (int b = 0; b < 2; b++)
            word[l][e][b] = W'(ch[e][b]);
    end else if (bsel) begin
      word = rbuf;
    end else begin
      word = dout;
    end
  end
endmodule
