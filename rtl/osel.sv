// Output selection (OSel) with the write buffers (wBUF) and the bypass
// buffer (rBUF).
//
// The L PUAs produce T LLM pairs per path per cycle, but an L-MEM word of a
// large stage holds 2T pairs per path. On the first cycle of a word
// (half = 0) the results are kept in wBUF; on the second (half = 1) OSel
// forms the word {new results, wBUF}, i.e. pairs 0..T-1 from wBUF and
// T..2T-1 from the PUAs. For a stage that fits in one cycle (single = 1) the
// results go straight to pairs 0..T-1 and the rest of the word is zero.
// Whenever a word is written (we), rBUF keeps a copy: the next cycle it
// stands in for an L-MEM read of that word, and after the last stage it
// holds the path metrics for the pruning unit. wBUF and rBUF are registers
// updated on the rising clock edge; word is combinational.
module osel
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned Q     = Q_DEF,
  localparam int unsigned W    = Q + N_LOG
) (
  input  logic                              clk,
  input  logic [L-1:0][T-1:0][1:0][W-1:0]   pu_out,  // PUA results
  input  logic                              active,  // a computing cycle
  input  logic                              single,  // stage done in one cycle
  input  logic                              half,    // second cycle of a word
  input  logic                              we,      // word written this cycle
  output logic [L-1:0][2*T-1:0][1:0][W-1:0] word,    // L-MEM write data
  output logic [L-1:0][2*T-1:0][1:0][W-1:0] rbuf
);
  logic [L-1:0][T-1:0][1:0][W-1:0] wbuf;

  always_ff @(posedge clk) begin
    if (active && !single && !half) wbuf <= pu_out;
    if (we) rbuf <= word;
  end

  always_comb
    for (int l = 0; l < L; l++)
      for (int e = 0; e < T; e++) begin
        if (single) begin
          word[l][e]     = pu_out[l][e];
          word[l][e + T] = '0;
        end else begin
          word[l][e]     = wbuf[l][e];
          word[l][e + T] = pu_out[l][e];
        end
      end
endmodule
