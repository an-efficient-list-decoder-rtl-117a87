// Self-checking test of the CRC units with L = 4 and the default CRC32
// (0x1EDC6F41). Each frame feeds 40 data bits and 32 check bits per slot
// with random path copies at every step (in every other frame no copies
// during the check phase, so that passing slots occur); the testbench keeps every slot's
// bit history. In the check phase half of the slots receive the correct
// check bits of the path they continue (computed here by long division),
// the others random bits. At the end cs_l must be 0 exactly when the last
// 32 bits of slot l's history are the CRC of its first 40.
module tb_crcu;
  localparam int unsigned L = 4, H = 32, KD = 40;
  localparam logic [H-1:0] POLY = 32'h1EDC6F41;
  logic clk = 0, init = 0, step = 0, shift = 0;
  logic [L-1:0][1:0] a = '0;
  logic [L-1:0] c = '0, cs;
  int checks = 0, failures = 0, passes = 0;
  bit hist [L][KD+H];

  crcu #(.L(L), .H(H), .POLY(POLY)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [H-1:0] crc_of(bit h [L][KD+H], int l);
    logic [H-1:0] r;
    r = '0;
    for (int j = 0; j < KD; j++) r = (r << 1) ^ ((h[l][j] ^ r[H-1]) ? POLY : '0);
    return r;
  endfunction

  initial begin
    for (int fr = 0; fr < 100; fr++) begin
      @(negedge clk); init = 1;
      @(negedge clk); init = 0;
      for (int j = 0; j < KD + H; j++) begin
        bit nh [L][KD+H];
        for (int l = 0; l < L; l++) a[l] = (j >= KD && fr % 2 == 0) ? 2'(l) : 2'($urandom);
        for (int l = 0; l < L; l++) begin
          nh[l] = hist[a[l]];
          if (j >= KD && (l % 2 == 0)) begin
            logic [H-1:0] r;
            r = crc_of(hist, int'(a[l]));
            c[l] = r[H - 1 - (j - KD)];
          end else c[l] = 1'($urandom);
          nh[l][j] = c[l];
        end
        step = 1; shift = (j >= KD);
        @(negedge clk);
        step = 0;
        hist = nh;
      end
      for (int l = 0; l < L; l++) begin
        logic [H-1:0] r, got;
        r = crc_of(hist, l);
        for (int q = 0; q < H; q++) got[H-1-q] = hist[l][KD+q];
        checks++;
        if (cs[l] != (r != got)) begin
          failures++;
          if (failures < 5) $display("frame %0d slot %0d: cs=%0d", fr, l, cs[l]);
        end
        if (r == got) passes++;
      end
    end
    checks++;
    if (passes == 0) begin failures++; $display("no passing slot was produced"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
