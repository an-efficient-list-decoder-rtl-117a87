// Self-checking test of the CCG at the default size (n = 10, L = 4):
// random decisions a_l and random phi per round; in every round cc_l is
// checked for every stage against a reference copy of the index registers
// kept here, then the round is committed.
module tb_ccg;
  localparam int unsigned N_LOG = 10, L = 4;
  logic clk = 0, init = 0, commit = 0;
  logic [L-1:0][1:0] a = '0;
  logic [3:0] phi_i = 4'd1, lam = 4'd1;
  logic [L-1:0][1:0] cc;
  int rref [L][N_LOG];
  int checks = 0, failures = 0;

  ccg #(.N_LOG(N_LOG), .L(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    for (int l = 0; l < L; l++) for (int s = 0; s < N_LOG; s++) rref[l][s] = 0;
    for (int rnd = 0; rnd < 400; rnd++) begin
      int w [L][N_LOG];
      int ph;
      ph = int'($urandom_range(N_LOG, 1));
      phi_i = 4'(ph);
      for (int l = 0; l < L; l++) a[l] = 2'($urandom);
      for (int l = 0; l < L; l++)
        for (int s = 0; s < N_LOG; s++) w[l][s] = (s < ph) ? rref[a[l]][s] : l;
      for (int lm = 1; lm <= N_LOG; lm++) begin
        lam = 4'(lm);
        #1;
        for (int l = 0; l < L; l++) begin
          checks++;
          if (int'(cc[l]) != w[l][lm-1]) begin
            failures++;
            if (failures < 5) $display("round %0d stage %0d path %0d: cc=%0d want %0d", rnd, lm, l, cc[l], w[l][lm-1]);
          end
        end
      end
      commit = 1;
      @(negedge clk);
      commit = 0;
      rref = w;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
