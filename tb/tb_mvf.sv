// Self-checking test of the maximum values filter for L = 4 (default) and
// L = 8 (the size of the network drawing). Metrics are distinct random
// values; the L outputs {a_r, c_r} must name exactly the L candidates with
// the largest metrics (candidate 2l+u is path l extended with bit u), each
// once, compared with a selection done here by counting.
module tb_mvf;
  localparam int unsigned N_LOG = 10, Q = 4, X1 = Q + N_LOG;
  int checks = 0, failures = 0;

  logic [3:0][1:0][X1-1:0] m4;
  logic [3:0][1:0] a4;
  logic [3:0] c4;
  logic [7:0][1:0][X1-1:0] m8;
  logic [7:0][2:0] a8;
  logic [7:0] c8;

  mvf #(.N_LOG(N_LOG), .L(4), .Q(Q)) u4 (.metric(m4), .a(a4), .c(c4));
  mvf #(.N_LOG(N_LOG), .L(8), .Q(Q)) u8 (.metric(m8), .a(a8), .c(c8));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Distinct values: a random offset plus a shuffled index.
  task automatic fill(input int nl, output int v [16]);
    int perm [16];
    for (int i = 0; i < 2 * nl; i++) perm[i] = i;
    for (int i = 2 * nl - 1; i > 0; i--) begin
      int j, t;
      j = int'($urandom_range(i)); t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int i = 0; i < 2 * nl; i++) v[i] = (int'($urandom_range(500)) * 16 + perm[i]) & 32'h3fff;
  endtask

  task automatic judge(input int nl, input int v [16], input int sel_cand [8]);
    bit seen [16];
    for (int i = 0; i < 16; i++) seen[i] = 0;
    for (int r = 0; r < nl; r++) begin
      int cnt;
      cnt = 0;  // candidates strictly larger than the chosen one
      for (int i = 0; i < 2 * nl; i++) if (v[i] > v[sel_cand[r]]) cnt++;
      checks++;
      if (cnt >= nl || seen[sel_cand[r]]) begin
        failures++;
        if (failures < 5) $display("L=%0d output %0d picks candidate %0d, not among the best", nl, r, sel_cand[r]);
      end
      seen[sel_cand[r]] = 1;
    end
  endtask

  initial begin
    for (int n = 0; n < 500; n++) begin
      int v4 [16], v8 [16], s [8];
      fill(4, v4); fill(8, v8);
      for (int l = 0; l < 4; l++) for (int u = 0; u < 2; u++) m4[l][u] = X1'(v4[2*l+u]);
      for (int l = 0; l < 8; l++) for (int u = 0; u < 2; u++) m8[l][u] = X1'(v8[2*l+u]);
      #1;
      for (int r = 0; r < 4; r++) s[r] = 2 * int'(a4[r]) + int'(c4[r]);
      judge(4, v4, s);
      for (int r = 0; r < 8; r++) s[r] = 2 * int'(a8[r]) + int'(c8[r]);
      judge(8, v8, s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
