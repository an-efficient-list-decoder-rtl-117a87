// Self-checking test of the crossbar at the default size: random words and
// random control, every output part compared with the selected input part.
module tb_crossbar;
  localparam int unsigned N_LOG = 10, L = 4, T = 8, Q = 4, W = Q + N_LOG;
  logic [L-1:0][2*T-1:0][1:0][W-1:0] din, dout;
  logic [L-1:0][1:0] cc;
  int checks = 0, failures = 0;

  crossbar #(.N_LOG(N_LOG), .L(L), .T(T), .Q(Q)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int l = 0; l < L; l++)
        for (int e = 0; e < 2 * T; e++) din[l][e] = {W'($urandom), W'($urandom)};
      cc = 8'($urandom);
      #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (dout[l] != din[cc[l]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
