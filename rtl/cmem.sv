// Channel message memory (C-MEM).
//
// Holds the N compressed channel messages of one frame as N/(2T) words of
// 2T messages, t+1 bits each; word w holds messages 2Tw .. 2Tw+2T-1, message
// e of the word in bits [e*(t+1) +: t+1]. One write port for the host that
// loads a frame and one read port for the decoder. Both are synchronous: a
// read address presented in one cycle gives its word in the next, as in a
// compiled register file. The paper sizes this memory; ports and timing are
// this design's choice.
module cmem
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned Q     = Q_DEF,
  localparam int unsigned DEPTH = (1 << N_LOG) / (2 * T),
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [AW-1:0]            waddr,
  input  logic [2*T-1:0][Q:0]      wdata,
  input  logic [AW-1:0]            raddr,
  output logic [2*T-1:0][Q:0]      rdata
);
  logic [2*T-1:0][Q:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
