// Channel message decompression (deComp).
//
// A received bit is stored as t+1 bits {Msg, s}: Msg is the non-negative
// log-likelihood of the more likely hypothesis against the less likely one,
// s is that hypothesis (the hard decision). The other LLM of the pair is 0:
//   s = 0: P[0] = Msg, P[1] = 0      s = 1: P[0] = 0, P[1] = Msg
// This module expands NE such messages (one C-MEM word) into LLM pairs.
// Combinational. The format (Msg in the upper t bits, s in bit 0) follows
// the compressed-message drawing; the bit order inside the word is this
// design's choice.
module decomp #(
  parameter int unsigned Q  = 4,    // t
  parameter int unsigned NE = 16    // messages per word (2T)
) (
  input  logic [NE-1:0][Q:0]        cmsg,
  output logic [NE-1:0][1:0][Q-1:0] llm
);
  always_comb
    for (int e = 0; e < NE; e++) begin
      llm[e][0] = cmsg[e][0] ? '0 : cmsg[e][Q:1];
      llm[e][1] = cmsg[e][0] ? cmsg[e][Q:1] : '0;
    end
endmodule
