// Self-checking test of the input selection: channel word copied to all
// paths (csel), bypass buffer (bsel) and L-MEM data, at the default size.
module tb_isel;
  localparam int unsigned N_LOG = 10, L = 4, T = 8, Q = 4, W = Q + N_LOG;
  logic [2*T-1:0][1:0][Q-1:0] ch;
  logic [L-1:0][2*T-1:0][1:0][W-1:0] dout, rbuf, word;
  logic csel, bsel;
  int checks = 0, failures = 0;

  isel #(.N_LOG(N_LOG), .L(L), .T(T), .Q(Q)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      for (int e = 0; e < 2 * T; e++) ch[e] = 8'($urandom);
      for (int l = 0; l < L; l++)
        for (int e = 0; e < 2 * T; e++) begin
          dout[l][e] = 28'($urandom);
          rbuf[l][e] = 28'($urandom);
        end
      csel = n[0]; bsel = n[1];
      #1;
      for (int l = 0; l < L; l++)
        for (int e = 0; e < 2 * T; e++)
          for (int b = 0; b < 2; b++) begin
            logic [W-1:0] x;
            x = csel ? W'(ch[e][b]) : bsel ? rbuf[l][e][b] : dout[l][e][b];
            checks++;
            if (word[l][e][b] != x) failures++;
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
