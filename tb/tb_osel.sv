// Self-checking test of OSel, wBUF and rBUF at the default size: two-cycle
// words ({second results, first results}), one-cycle words (results then
// zeros), and rBUF holding the last written word.
module tb_osel;
  localparam int unsigned N_LOG = 10, L = 4, T = 8, Q = 4, W = Q + N_LOG;
  typedef logic [L-1:0][T-1:0][1:0][W-1:0] half_t;
  typedef logic [L-1:0][2*T-1:0][1:0][W-1:0] word_t;
  logic clk = 0;
  half_t pu_out;
  logic active = 0, single = 0, half = 0, we = 0;
  word_t word, rbuf, exp_w;
  int checks = 0, failures = 0;

  osel #(.N_LOG(N_LOG), .L(L), .T(T), .Q(Q)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic half_t rnd();
    half_t h;
    for (int l = 0; l < L; l++) for (int e = 0; e < T; e++) h[l][e] = 28'($urandom);
    return h;
  endfunction

  initial begin
    for (int n = 0; n < 200; n++) begin
      half_t h0, h1;
      h0 = rnd(); h1 = rnd();
      if (n % 3 == 0) begin
        @(negedge clk);
        active = 1; single = 1; half = 0; we = 1; pu_out = h0;
        #1;
        for (int l = 0; l < L; l++) for (int e = 0; e < T; e++) begin
          exp_w[l][e] = h0[l][e]; exp_w[l][e + T] = '0;
        end
      end else begin
        @(negedge clk);
        active = 1; single = 0; half = 0; we = 0; pu_out = h0;
        @(negedge clk);
        half = 1; we = 1; pu_out = h1;
        #1;
        for (int l = 0; l < L; l++) for (int e = 0; e < T; e++) begin
          exp_w[l][e] = h0[l][e]; exp_w[l][e + T] = h1[l][e];
        end
      end
      checks++;
      if (word != exp_w) begin failures++; if (failures < 5) $display("word %0d wrong", n); end
      @(negedge clk);
      active = 0; we = 0; pu_out = rnd();
      checks++;
      if (rbuf != exp_w) begin failures++; if (failures < 5) $display("rbuf %0d wrong", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
