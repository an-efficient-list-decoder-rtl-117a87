// Self-checking test of the path pruning unit at the default size
// (L = 4): after init the first two information bits fork the single path
// into 2 and then 4 (slot l keeps bit 0, slot l+n forks with bit 1); with
// the list full, decisions must name the 4 best of the 8 metrics; a frozen
// bit keeps every slot on its own path with bit 0. Decisions appear one
// clock after the pruning cycle.
module tb_ppu;
  localparam int unsigned N_LOG = 10, L = 4, Q = 4, X1 = Q + N_LOG;
  logic clk = 0, init = 0, prune = 0, frozen = 0;
  logic [L-1:0][1:0][X1-1:0] metric = '0;
  logic [3:0] phi_i = 4'd10, lam = 4'd10;
  logic [L-1:0][1:0] a, cc;
  logic [L-1:0] c;
  logic list_full;
  int checks = 0, failures = 0;

  ppu #(.N_LOG(N_LOG), .L(L), .Q(Q)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_ac(input int ea [L], input int ec [L], input string what);
    for (int l = 0; l < L; l++) begin
      checks++;
      if (int'(a[l]) != ea[l] || int'(c[l]) != ec[l]) begin
        failures++;
        if (failures < 8) $display("%s slot %0d: a=%0d c=%0d want %0d %0d", what, l, a[l], c[l], ea[l], ec[l]);
      end
    end
  endtask

  initial begin
    for (int fr = 0; fr < 20; fr++) begin
      @(negedge clk); init = 1;
      @(negedge clk); init = 0;
      checks++;
      if (list_full) failures++;
      expect_ac('{0, 1, 2, 3}, '{0, 0, 0, 0}, "after init");
      prune = 1; @(negedge clk); prune = 0;
      expect_ac('{0, 0, 2, 3}, '{0, 1, 0, 0}, "fork 1");
      frozen = 1; @(negedge clk); frozen = 0;
      expect_ac('{0, 1, 2, 3}, '{0, 0, 0, 0}, "frozen");
      prune = 1; @(negedge clk); prune = 0;
      expect_ac('{0, 1, 0, 1}, '{0, 0, 1, 1}, "fork 2");
      checks++;
      if (!list_full) failures++;
      for (int n = 0; n < 30; n++) begin
        int v [2*L];
        for (int i = 0; i < 2 * L; i++) v[i] = int'($urandom_range(1000)) * 8 + i;
        for (int l = 0; l < L; l++) for (int u = 0; u < 2; u++) metric[l][u] = X1'(v[2*l+u]);
        prune = 1; @(negedge clk); prune = 0;
        for (int r = 0; r < L; r++) begin
          int cnt;
          cnt = 0;
          for (int i = 0; i < 2 * L; i++) if (v[i] > v[2*int'(a[r]) + int'(c[r])]) cnt++;
          checks++;
          if (cnt >= L) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
