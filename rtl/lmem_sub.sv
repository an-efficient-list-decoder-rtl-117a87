// One regular sub-memory S_lambda of the internal LLM memory (L-MEM).
//
// S_lambda stores the LLMs of stage lambda of all L paths, each t+lambda
// bits wide (WS). A word holds E LLM pairs per path, path l in the l-th part
// of the word; the memory has DEPTH words. When the stage has more than 2T
// pairs per path, E = 2T and DEPTH = 2^(n-lambda)/(2T); otherwise the whole
// stage fits in one word. The ports use the decoder's uniform bus (W bits
// per LLM, 2T pairs per path): writing drops the unused high bits and
// pairs, reading zero-extends. Synchronous write and read (registered read
// data), as a register file; a read of the word written in the same cycle
// returns the old contents, which the decoder's bypass buffer covers.
module lmem_sub #(
  parameter int unsigned L     = 4,
  parameter int unsigned T     = 8,
  parameter int unsigned W     = 14,   // uniform bus LLM width
  parameter int unsigned WS    = 5,    // stored LLM width t+lambda
  parameter int unsigned E     = 16,   // pairs per path per word
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                           clk,
  input  logic                           we,
  input  logic [AW-1:0]                  waddr,
  input  logic [L-1:0][2*T-1:0][1:0][W-1:0] wdata,
  input  logic [AW-1:0]                  raddr,
  output logic [L-1:0][2*T-1:0][1:0][W-1:0] rdata
);
  typedef logic [L-1:0][E-1:0][1:0][WS-1:0] word_t;
  word_t mem [DEPTH];
  word_t wword, rword;

  always_comb
    for (int l = 0; l < L; l++)
      for (int e = 0; e < E; e++)
        for (int b = 0; b < 2; b++)
          wword[l][e][b] = wdata[l][e][b][WS-1:0];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wword;
    rword <= mem[raddr];
  end

  always_comb begin
    rdata = '0;
    for (int l = 0; l < L; l++)
      for (int e = 0; e < E; e++)
        for (int b = 0; b < 2; b++)
          rdata[l][e][b] = W'(rword[l][e][b]);
  end
endmodule
