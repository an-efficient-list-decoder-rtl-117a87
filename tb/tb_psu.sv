// Self-checking test of the partial sum units with N = 32, L = 4, T = 2.
// A whole frame of random decisions (random path a_l and bit c_l for every
// slot) is played; the testbench keeps the full decided bit history of
// every slot, copied on every decision. Before each commit it checks the
// partial sums the PUs of the next bit's G stage phi(i) receive, in every
// cycle of that stage, against the polar transform of the last
// 2^(n-phi) decided bits computed here from the history
// (t[2k] = left[k] ^ right[k], t[2k+1] = right[k], recursively).
module tb_psu;
  localparam int unsigned N_LOG = 5, L = 4, T = 2, N = 1 << N_LOG;
  logic clk = 0, init = 0, commit = 0;
  logic [N_LOG-1:0] m = '0, kcyc = '0;
  logic [L-1:0][1:0] a = '0;
  logic [L-1:0] c = '0;
  logic [2:0] lam = 3'd1;
  logic [L-1:0][T-1:0] u;
  int checks = 0, failures = 0;
  bit hist [L][N];

  psu #(.N_LOG(N_LOG), .L(L), .T(T)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int phi_of(int i);
    int tz;
    if (i == 0) return 1;
    tz = 0;
    while (((i >> tz) & 1) == 0) tz++;
    return N_LOG - tz;
  endfunction

  initial begin
    for (int fr = 0; fr < 20; fr++) begin
      @(negedge clk); init = 1;
      @(negedge clk); init = 0;
      for (int i = 0; i < N; i++) begin
        if (i > 0) begin
          bit nh [L][N];
          int ph, sz;
          for (int l = 0; l < L; l++) begin
            for (int q = 0; q < N; q++) nh[l][q] = hist[a[l]][q];
            nh[l][i-1] = c[l];
          end
          ph = phi_of(i);
          sz = 1 << (N_LOG - ph);
          lam = 3'(ph);
          for (int k = 0; k < ((sz > T) ? sz / T : 1); k++) begin
            kcyc = N_LOG'(k);
            #1;
            for (int l = 0; l < L; l++) begin
              bit tr [N];
              for (int q = 0; q < sz; q++) tr[q] = nh[l][i - sz + q];
              for (int s = 1; s < sz; s *= 2) begin
                bit tmp [N];
                for (int blk = 0; blk < sz; blk += 2 * s)
                  for (int q = 0; q < s; q++) begin
                    tmp[blk + 2*q]     = tr[blk + q] ^ tr[blk + s + q];
                    tmp[blk + 2*q + 1] = tr[blk + s + q];
                  end
                tr = tmp;
              end
              for (int j = 0; j < T; j++) if (k * T + j < sz) begin
                checks++;
                if (u[l][j] != tr[k * T + j]) begin
                  failures++;
                  if (failures < 5) $display("bit %0d slot %0d pu %0d wrong", i, l, k * T + j);
                end
              end
            end
          end
          m = N_LOG'(i - 1); commit = 1;
          @(negedge clk);
          commit = 0;
          for (int l = 0; l < L; l++) for (int q = 0; q < N; q++) hist[l][q] = nh[l][q];
        end
        for (int l = 0; l < L; l++) begin
          a[l] = 2'($urandom);
          c[l] = 1'($urandom);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
