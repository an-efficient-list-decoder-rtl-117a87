// Self-checking test of a PUA at the default n = 10, T = 8, t = 4. The
// input width of each PU must be the one listed for this size,
// 13,12,11,11,10,10,10,10: every input is given random bits above that
// width, which the PU must ignore, and random values within it, for which
// the outputs are compared with F and G computed here.
module tb_pua;
  localparam int unsigned N_LOG = 10, T = 8, Q = 4, W = Q + N_LOG;
  localparam int PW [T] = '{13, 12, 11, 11, 10, 10, 10, 10};
  logic [2*T-1:0][1:0][W-1:0] din;
  logic [T-1:0] u;
  logic mode;
  logic [T-1:0][1:0][W-1:0] dout;
  int checks = 0, failures = 0;

  pua #(.N_LOG(N_LOG), .T(T), .Q(Q)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int v [2*T][2];
      mode = n[0];
      u = T'($urandom);
      for (int e = 0; e < 2 * T; e++)
        for (int b = 0; b < 2; b++) begin
          int pw;
          pw = PW[e / 2];
          v[e][b] = int'($urandom) & ((1 << pw) - 1);
          din[e][b] = W'(v[e][b]) | (W'($urandom) << pw);  // junk above the width
        end
      #1;
      for (int j = 0; j < T; j++) begin
        int a0, a1, b0, b1, e0, e1;
        a0 = v[2*j][0]; a1 = v[2*j][1]; b0 = v[2*j+1][0]; b1 = v[2*j+1][1];
        if (mode) begin
          e0 = (u[j] ? a1 : a0) + b0;
          e1 = (u[j] ? a0 : a1) + b1;
        end else begin
          e0 = (a0 + b0 > a1 + b1) ? a0 + b0 : a1 + b1;
          e1 = (a1 + b0 > a0 + b1) ? a1 + b0 : a0 + b1;
        end
        checks++;
        if (int'(dout[j][0]) != e0 || int'(dout[j][1]) != e1) begin
          failures++;
          if (failures < 10) $display("PU %0d: got %0d,%0d want %0d,%0d", j, dout[j][0], dout[j][1], e0, e1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
