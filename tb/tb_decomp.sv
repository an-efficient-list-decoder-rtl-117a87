// Self-checking test of the channel message decompression: every {Msg, s}
// of t = 4 bits in every lane position.
module tb_decomp;
  localparam int unsigned Q = 4, NE = 16;
  logic [NE-1:0][Q:0] cmsg;
  logic [NE-1:0][1:0][Q-1:0] llm;
  int checks = 0, failures = 0;

  decomp #(.Q(Q), .NE(NE)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << (Q + 1)); v++)
      for (int e = 0; e < NE; e++) begin
        int msg, s;
        cmsg = (NE * (Q + 1))'($urandom) ^ ((NE * (Q + 1))'($urandom) << 32);
        cmsg[e] = (Q + 1)'(v);
        msg = v >> 1; s = v & 1;
        #1;
        checks++;
        if (int'(llm[e][0]) != ((s != 0) ? 0 : msg) || int'(llm[e][1]) != ((s != 0) ? msg : 0)) begin
          failures++;
          $display("msg=%0d s=%0d: got %0d,%0d", msg, s, llm[e][0], llm[e][1]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
