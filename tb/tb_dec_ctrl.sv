// Self-checking test of the decoder controller with N = 64, T = 2, K = 16,
// h = 8 and random information sets. The testbench builds its own schedule
// (for every bit i: stages phi(i)..n, stage lambda lasting
// max(1, 2^(n-lambda)/T) cycles, plus one pruning cycle for information
// bits) and checks cycle by cycle: state, bit, stage, cycle, mode, write
// enable/address, that the read address issued in a cycle is the word the
// next cycle needs, the bypass flag, the frozen/prune/commit pulses and the
// committed bit index. At the end it checks the total cycle count
// 2N + (N/T) log2(N/4T) + K, that exactly K information commits happened and
// that the last h of them were in the compare phase.
module tb_dec_ctrl;
  import polar_pkg::*;
  localparam int unsigned N_LOG = 6, T = 2, K = 16, H = 8, N = 1 << N_LOG;
  localparam int unsigned NC = 2 * N + (N / T) * $clog2(N / (4 * T)) + K;
  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0] info_set;
  dec_state_e state;
  logic [N_LOG-1:0] bit_i, kcyc, commit_m;
  logic [2:0] lam, phi_i, lmem_rstage, wstage;
  logic mode, csel, bsel, active, single, half, we, init, prune, frozen, commit;
  logic info_step, crc_shift, done;
  logic [3:0] cmem_raddr;
  logic [2:0] lmem_raddr, waddr;
  int checks = 0, failures = 0;

  dec_ctrl #(.N_LOG(N_LOG), .T(T), .K(K), .H(H)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("t=%0t bit %0d lam %0d k %0d: %s", $time, bit_i, lam, kcyc, what);
    end
  endtask

  function automatic int phi_of(int i);
    int tz;
    if (i == 0) return 1;
    tz = 0;
    while (((i >> tz) & 1) == 0) tz++;
    return N_LOG - tz;
  endfunction

  // Schedule entry: kind 0 = compute, 1 = prune.
  typedef struct { int b; int lm; int k; int kind; } step_t;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 8; fr++) begin
      step_t sch [$];
      int cyc, n_info, n_shift, prev_ws, prev_wa;
      bit prev_we;
      // random information set with K ones
      sch.delete();
      info_set = '0;
      n_info = 0;
      while (n_info < K) begin
        automatic int p = $urandom_range(N - 1);
        if (!info_set[p]) begin info_set[p] = 1; n_info++; end
      end
      for (int i = 0; i < N; i++) begin
        for (int lm = phi_of(i); lm <= N_LOG; lm++) begin
          automatic int nc = ((1 << (N_LOG - lm)) > T) ? (1 << (N_LOG - lm)) / T : 1;
          for (int k = 0; k < nc; k++) sch.push_back('{i, lm, k, 0});
        end
        if (info_set[i]) sch.push_back('{i, N_LOG, 0, 1});
      end
      chk(sch.size() == NC, "reference schedule length");
      @(negedge clk);
      chk(state == ST_IDLE || state == ST_DONE, "not idle before start");
      start = 1; #1;
      chk(init == 1, "init on start");
      @(negedge clk); start = 0;
      cyc = 0; n_info = 0; n_shift = 0; prev_we = 1'b0; prev_ws = 0; prev_wa = 0;
      for (int s = 0; s < sch.size(); s++) begin
        automatic step_t e = sch[s];
        bit last_of_round, next_needs;
        #1;
        chk(int'(bit_i) == e.b, "bit index");
        if (e.kind == 0) begin
          chk(state == ST_COMP, "state COMP");
          chk(int'(lam) == e.lm && int'(kcyc) == e.k, "stage/cycle");
          chk(mode == (e.b != 0 && e.lm == phi_of(e.b)), "mode");
          chk(we == (single || kcyc[0]), "write enable");
          chk(single == (((1 << (N_LOG - e.lm)) <= T)), "single");
          chk(int'(wstage) == e.lm && int'(waddr) == e.k / 2, "write address");
          chk(csel == (e.lm == 1), "channel select");
          // the read issued last cycle is this cycle's operand; bypass iff
          // that word was written in the cycle the read was issued
          chk(bsel == (e.lm > 1 && prev_we && prev_ws == e.lm - 1 && prev_wa == e.k), "bypass");
        end else begin
          chk(state == ST_PRUNE && prune, "state PRUNE");
        end
        last_of_round = (s + 1 == sch.size()) || (sch[s+1].b != e.b);
        chk(frozen == (e.kind == 0 && last_of_round && !info_set[e.b]), "frozen pulse");
        chk(commit == (last_of_round && e.b != 0), "commit pulse");
        if (commit) begin
          chk(int'(commit_m) == e.b - 1, "commit index");
          chk(info_step == info_set[e.b - 1], "info step");
        end
        if (info_step) begin n_info++; if (crc_shift) n_shift++; end
        // read address issued for the next step
        if (s + 1 < sch.size() && sch[s+1].kind == 0) begin
          if (sch[s+1].lm == 1) chk(int'(cmem_raddr) == sch[s+1].k, "C-MEM read address");
          else chk(int'(lmem_rstage) == sch[s+1].lm - 1 && int'(lmem_raddr) == sch[s+1].k,
                   "L-MEM read address");
        end
        prev_we = we; prev_ws = int'(wstage); prev_wa = int'(waddr);
        @(negedge clk);
        cyc++;
      end
      #1;
      chk(state == ST_FIN && commit && int'(commit_m) == N - 1, "final commit");
      if (info_step) begin n_info++; if (crc_shift) n_shift++; end
      @(negedge clk); cyc++;
      chk(done, "done after N_C + 1 cycles");
      chk(cyc == NC + 1, "cycle count");
      chk(n_info == K, "K information commits");
      chk(n_shift == H, "h commits in compare phase");
      repeat ($urandom_range(3)) @(negedge clk);
      chk(done, "done holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
