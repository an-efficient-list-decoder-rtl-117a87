// CRC units (CRCU_0 .. CRCU_{L-1}) with checksum comparison.
//
// Each path has an h-bit serial CRC register d_l (generator
// p(x) = x^h + p_{h-1}x^{h-1} + ... + p_1 x + 1, POLY holds p_{h-1}..p_0)
// and a flag cs_l. For each decided information bit c_l:
//   shift = 0 (first K-h bits): d_l <= LFSR step of d_{a_l} with input c_l:
//       fb = c_l ^ d[h-1];  d'[0] = fb;  d'[k] = d[k-1] ^ (p_k & fb)
//   shift = 1 (last h bits):   d_l <= d_{a_l} << 1 and
//       cs_l <= cs_{a_l} | (d_{a_l}[h-1] ^ c_l)
// so the remainder is compared MSB first with the received CRC bits, and
// the path passes only if cs_l = 0 at the end. Both use the registers of
// path a_l (switch network SW) because slot l continues that path. The
// register starts at 0; no final XOR. Registers update on the rising edge
// when step = 1. Follows the serial CRC drawing; initial value and bit
// order are this design's choice.
module crcu
  import polar_pkg::*;
#(
  parameter int unsigned L      = L_DEF,
  parameter int unsigned H      = H_DEF,
  parameter logic [H-1:0] POLY  = H'(POLY_DEF),
  localparam int unsigned LW    = (L > 1) ? $clog2(L) : 1
) (
  input  logic                 clk,
  input  logic                 init,
  input  logic                 step,     // an information bit is committed
  input  logic                 shift,    // compare phase
  input  logic [L-1:0][LW-1:0] a,
  input  logic [L-1:0]         c,
  output logic [L-1:0]         cs        // 1: CRC mismatch seen
);
  logic [L-1:0][H-1:0] d;

  always_ff @(posedge clk) begin
    if (init) begin
      d  <= '0;
      cs <= '0;
    end else if (step)
      for (int l = 0; l < L; l++) begin
        if (!shift) begin
          d[l][0] <= c[l] ^ d[a[l]][H-1];
          for (int k = 1; k < H; k++)
            d[l][k] <= d[a[l]][k-1] ^ (POLY[k] & (c[l] ^ d[a[l]][H-1]));
          cs[l] <= cs[a[l]];
        end else begin
          d[l]  <= d[a[l]] << 1;
          cs[l] <= cs[a[l]] | (d[a[l]][H-1] ^ c[l]);
        end
      end
  end
endmodule
