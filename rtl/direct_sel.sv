// Direct selection of the output codeword.
//
// Instead of comparing the metrics of all candidates that pass the CRC, the
// flags cs_0 .. cs_{L-1} are scanned from path 0 upward and the first path
// with cs_l = 0 is chosen. When every path fails, fail is raised and path 0
// is output (a decoding failure the system may answer with a
// retransmission). The scan is a priority encoder here, combinational.
module direct_sel
  import polar_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned KD    = K_DEF - H_DEF,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic [L-1:0]         cs,
  input  logic [L-1:0][KD-1:0] bits,
  output logic [LW-1:0]        sel,
  output logic                 fail,
  output logic [KD-1:0]        data
);
  always_comb begin
    sel  = '0;
    fail = 1'b1;
    for (int l = L - 1; l >= 0; l--)
      if (!cs[l]) begin
        sel  = LW'(l);
        fail = 1'b0;
      end
    data = bits[sel];
  end
endmodule
