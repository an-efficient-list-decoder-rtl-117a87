// Processing unit (PU): one G or max-approximated F operation on log-domain
// likelihood messages (LLMs).
//
// Inputs are two LLM pairs a = P[2k] and b = P[2k+1]; the output pair c is
// P'[k] one stage further. Four adders form a0+b0, a1+b1, a1+b0 and a0+b1
// and are shared by both operations:
//   mode = 0 (F):  c[0] = max(a0+b0, a1+b1),  c[1] = max(a1+b0, a0+b1)
//   mode = 1 (G):  c[0] = a[u]+b[0],          c[1] = a[1^u]+b[1]
// where u is the partial sum of the already decided half. All LLMs are
// unsigned (non-negative), so an output needs exactly one bit more than an
// input: P-bit inputs give (P+1)-bit outputs and nothing can overflow.
// Purely combinational. The adder/max/mux arrangement follows the PU figure
// of the architecture; unsigned LLMs follow from the compressed channel
// message format.
module pu #(
  parameter int unsigned P = 13   // input LLM width p
) (
  input  logic [1:0][P-1:0] a,
  input  logic [1:0][P-1:0] b,
  input  logic              u,     // partial sum, used in G mode
  input  logic              mode,  // 0: F, 1: G
  output logic [1:0][P:0]   c
);
  logic [P:0] s00, s11, s10, s01;

  always_comb begin
    s00 = {1'b0, a[0]} + {1'b0, b[0]};
    s11 = {1'b0, a[1]} + {1'b0, b[1]};
    s10 = {1'b0, a[1]} + {1'b0, b[0]};
    s01 = {1'b0, a[0]} + {1'b0, b[1]};
    if (mode) begin
      c[0] = u ? s10 : s00;
      c[1] = u ? s01 : s11;
    end else begin
      c[0] = (s00 > s11) ? s00 : s11;
      c[1] = (s10 > s01) ? s10 : s01;
    end
  end
endmodule
