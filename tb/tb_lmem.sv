// Self-checking test of the L-MEM at the default size (n = 10, L = 4,
// T = 8, t = 4). Every word of every sub-memory S_1..S_10 is written with
// random LLMs that fit its width t+lambda in the pairs it holds, plus junk
// bits above that width and in the pairs beyond, which must read back as
// zero. Words are then read in random order, one cycle after their address.
module tb_lmem;
  import polar_pkg::*;
  localparam int unsigned N_LOG = 10, L = 4, T = 8, Q = 4, W = Q + N_LOG;
  localparam int unsigned SW = 4, AW = 5;
  typedef logic [L-1:0][2*T-1:0][1:0][W-1:0] word_t;
  logic clk = 0, we = 0;
  logic [SW-1:0] wstage = '0, rstage = '0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  word_t wdata = '0, rdata;
  word_t exp_mem [N_LOG+1][32];
  int checks = 0, failures = 0;

  lmem #(.N_LOG(N_LOG), .L(L), .T(T), .Q(Q)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Words and pairs of S_lambda, computed here from the stage sizes.
  function automatic int depth_of(int lam);
    int e; e = 1 << (N_LOG - lam);
    return (e > 2 * T) ? e / (2 * T) : 1;
  endfunction
  function automatic int elems_of(int lam);
    int e; e = 1 << (N_LOG - lam);
    return (e > 2 * T) ? 2 * T : e;
  endfunction

  initial begin
    for (int lam = 1; lam <= N_LOG; lam++)
      for (int w = 0; w < depth_of(lam); w++) begin
        word_t d, e;
        e = '0;
        for (int l = 0; l < L; l++)
          for (int p = 0; p < 2 * T; p++)
            for (int b = 0; b < 2; b++) begin
              d[l][p][b] = W'($urandom);
              if (p < elems_of(lam)) e[l][p][b] = d[l][p][b] & W'((1 << (Q + lam)) - 1);
            end
        @(negedge clk);
        we = 1; wstage = SW'(lam); waddr = AW'(w); wdata = d;
        exp_mem[lam][w] = e;
      end
    @(negedge clk); we = 0;
    for (int n = 0; n < 400; n++) begin
      int lam, w;
      lam = int'($urandom_range(N_LOG, 1));
      w = int'($urandom_range(depth_of(lam) - 1));
      rstage = SW'(lam); raddr = AW'(w);
      @(negedge clk);
      rstage = SW'($urandom_range(N_LOG, 1)); raddr = '0;
      #1;
      checks++;
      if (rdata != exp_mem[lam][w]) begin
        failures++;
        if (failures < 5) $display("S_%0d word %0d wrong", lam, w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
