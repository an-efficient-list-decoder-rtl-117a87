// End-to-end test of the CA-SCL list decoder at its default size
// (N = 1024, L = 4, T = 8, t = 4, K = 512 with CRC32 0x1EDC6F41).
//
// The testbench builds its own code: the K most reliable bit positions by
// the Bhattacharyya recursion for an erasure channel of erasure rate 0.5
// (going from the MSB of the bit index to the LSB: bit 1 -> z*z, bit 0 ->
// 2z - z*z), the data with its CRC (long division, MSB first) placed on
// them in index order, and the polar encoding
// x = transform(u), transform(first half, second half) interleaved as
// x[2k] = left[k] ^ right[k], x[2k+1] = right[k]. The codeword is sent over
// BPSK with Gaussian noise; LLRs are quantised to t bits plus the hard
// decision. Frames:
//   - one noiseless frame and frames at Eb/N0 = 3.5 dB: each must decode to
//     the sent data with fail = 0;
//   - frames at 1.5 dB: where fail = 0 the data must be the sent data;
//   - one frame of random channel messages: must announce fail.
// Every frame must take N_C + 1 cycles from start to done, with
// N_C = 2N + (N/T) log2(N/(4T)) + K. The test also counts how often the
// mechanisms of the architecture were used (G mode, half-word writes
// through wBUF, rBUF bypass, the path fork while the list fills, pruning by
// the MVF with paths copied, a path other than 0 chosen, CRC failure) and
// counts a failure for any that never occurred.
module tb_list_decoder;
  import polar_pkg::*;

  localparam int unsigned N_LOG = N_LOG_DEF;
  localparam int unsigned N     = 1 << N_LOG;
  localparam int unsigned L     = L_DEF;
  localparam int unsigned T     = T_DEF;
  localparam int unsigned Q     = Q_DEF;
  localparam int unsigned K     = K_DEF;
  localparam int unsigned H     = H_DEF;
  localparam int unsigned KD    = K - H;
  localparam logic [H-1:0] POLY = POLY_DEF;
  localparam int unsigned CAW   = $clog2(N / (2 * T));
  localparam int unsigned LW    = $clog2(L);
  localparam int unsigned NC    = 2 * N + (N / T) * ($clog2(N) - $clog2(4 * T)) + K;

  logic                 clk = 0, rst_n = 0;
  logic                 ch_we = 0, start = 0;
  logic [CAW-1:0]       ch_waddr = '0;
  logic [2*T-1:0][Q:0]  ch_wdata = '0;
  logic [N-1:0]         info_set;
  logic                 done, fail, busy, list_full;
  logic [N_LOG-1:0]     cur_bit;
  logic [LW-1:0]        sel;
  logic [KD-1:0]        data;

  list_decoder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_gmode = 0, n_wbuf = 0, n_bypass = 0, n_fork = 0, n_prune = 0, n_copy = 0;
  int n_sel_nz = 0, n_fail = 0, busy_bad = 0;

  // Mechanism monitors.
  always @(posedge clk) begin
    if (dut.u_ctrl.active && dut.mode) n_gmode++;
    if (dut.u_ctrl.active && dut.we && !dut.single) n_wbuf++;
    if (dut.u_ctrl.active && dut.bsel && !dut.csel) n_bypass++;
    if (dut.prune && !list_full) n_fork++;
    if (dut.prune && list_full) begin
      n_prune++;
      for (int l = 0; l < L; l++) if (dut.u_ppu.nxt_a[l] != LW'(l)) begin n_copy++; break; end
    end
  end

  // Watchdog.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real    z [N];
  bit     u [N];
  bit     x [N];
  bit     dat [KD];
  logic [Q:0] chm [N];

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  task automatic build_info_set();
    bit taken [N];
    for (int i = 0; i < N; i++) begin
      real zz;
      zz = 0.5;
      for (int b = N_LOG - 1; b >= 0; b--)
        zz = (((i >> b) & 1) != 0) ? zz * zz : 2.0 * zz - zz * zz;
      z[i] = zz;
      taken[i] = 0;
    end
    info_set = '0;
    for (int k = 0; k < K; k++) begin
      int best;
      best = -1;
      for (int i = 0; i < N; i++)
        if (!taken[i] && (best < 0 || z[i] < z[best])) best = i;
      taken[best] = 1;
      info_set[best] = 1'b1;
    end
  endtask

  task automatic make_frame(input real ebn0_db, input bit noiseless, input bit random_ch);
    logic [H-1:0] crc;
    int p;
    real sigma, llr, scale;
    crc = '0;
    for (int j = 0; j < KD; j++) begin
      bit fb;
      dat[j] = bit'($urandom & 1);
      fb = dat[j] ^ crc[H-1];
      crc = (crc << 1) ^ (fb ? POLY : '0);
    end
    p = 0;
    for (int i = 0; i < N; i++) begin
      u[i] = 0;
      if (info_set[i]) begin
        u[i] = (p < KD) ? dat[p] : crc[H - 1 - (p - KD)];
        p++;
      end
    end
    for (int i = 0; i < N; i++) x[i] = u[i];
    for (int s = 1; s < N; s *= 2) begin
      bit tmp [N];
      for (int blk = 0; blk < N; blk += 2 * s)
        for (int k = 0; k < s; k++) begin
          tmp[blk + 2 * k]     = x[blk + k] ^ x[blk + s + k];
          tmp[blk + 2 * k + 1] = x[blk + s + k];
        end
      x = tmp;
    end
    sigma = $sqrt(1.0 / (2.0 * (real'(K) / real'(N)) * (10.0 ** (ebn0_db / 10.0))));
    scale = 2.0 / (sigma * sigma) * 1.5;
    for (int i = 0; i < N; i++) begin
      int m;
      real y;
      y = x[i] ? -1.0 : 1.0;
      if (!noiseless) y += sigma * gauss();
      llr = y * scale;
      m = int'(llr < 0 ? -llr : llr);
      if (m > (1 << Q) - 1) m = (1 << Q) - 1;
      chm[i] = {Q'(m), (llr < 0) ? 1'b1 : 1'b0};
      if (random_ch) chm[i] = (Q + 1)'($urandom);
    end
  endtask

  task automatic run_frame(input string tag, input bit must_pass, input bit must_fail);
    int cyc;
    for (int w = 0; w < N / (2 * T); w++) begin
      @(negedge clk);
      ch_we = 1; ch_waddr = CAW'(w);
      for (int e = 0; e < 2 * T; e++) ch_wdata[e] = chm[2 * T * w + e];
    end
    @(negedge clk);
    ch_we = 0; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;  // edges after the one that took start
    busy_bad = 0;
    while (!done) begin
      if (!busy || int'(cur_bit) >= N) busy_bad++;
      @(negedge clk); cyc++;
    end
    checks++;
    if (busy_bad != 0 || busy) begin
      failures++;
      $display("%s: busy status wrong", tag);
    end
    checks++;
    if (cyc != NC + 1) begin
      failures++;
      $display("%s: %0d cycles from start to done, expected %0d", tag, cyc, NC + 1);
    end
    if (fail) n_fail++;
    if (!fail && sel != 0) n_sel_nz++;
    if (must_fail) begin
      checks++;
      if (!fail) begin failures++; $display("%s: random channel passed the CRC", tag); end
    end else begin
      bit ok;
      ok = 1;
      for (int j = 0; j < KD; j++) if (data[j] != dat[j]) ok = 0;
      if (must_pass) begin
        checks++;
        if (fail || !ok) begin
          failures++;
          $display("%s: fail=%0d data_ok=%0d sel=%0d", tag, fail, ok, sel);
        end
      end else if (!fail) begin
        checks++;
        if (!ok) begin failures++; $display("%s: CRC passed with wrong data", tag); end
      end
    end
  endtask

  initial begin
    build_info_set();
    repeat (3) @(negedge clk);
    rst_n = 1;
    make_frame(0.0, 1, 0); run_frame("noiseless", 1, 0);
    for (int f = 0; f < 6; f++) begin make_frame(3.5, 0, 0); run_frame($sformatf("3.5dB #%0d", f), 1, 0); end
    for (int f = 0; f < 16; f++) begin make_frame(1.5, 0, 0); run_frame($sformatf("1.5dB #%0d", f), 0, 0); end
    make_frame(0.0, 0, 1); run_frame("random", 0, 1);
    $display("mechanisms: G=%0d wBUF=%0d bypass=%0d fork=%0d prune=%0d copy=%0d sel!=0=%0d crc_fail=%0d",
             n_gmode, n_wbuf, n_bypass, n_fork, n_prune, n_copy, n_sel_nz, n_fail);
    checks += 8;
    if (n_gmode == 0)  begin failures++; $display("G mode never used"); end
    if (n_wbuf == 0)   begin failures++; $display("wBUF never used"); end
    if (n_bypass == 0) begin failures++; $display("bypass never used"); end
    if (n_fork == 0)   begin failures++; $display("fork never used"); end
    if (n_prune == 0)  begin failures++; $display("pruning never used"); end
    if (n_copy == 0)   begin failures++; $display("no path was ever copied"); end
    if (n_sel_nz == 0) begin failures++; $display("direct selection never chose a path other than 0"); end
    if (n_fail == 0)   begin failures++; $display("CRC failure never announced"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
