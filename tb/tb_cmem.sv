// Self-checking test of the C-MEM at the default size (64 words of 16
// five-bit messages): fill with random words, read back in random order
// and check that each word arrives exactly one cycle after its address.
module tb_cmem;
  localparam int unsigned N_LOG = 10, T = 8, Q = 4;
  localparam int unsigned DEPTH = (1 << N_LOG) / (2 * T), AW = $clog2(DEPTH);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [2*T-1:0][Q:0] wdata = '0, rdata;
  logic [2*T-1:0][Q:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  cmem #(.N_LOG(N_LOG), .T(T), .Q(Q)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < DEPTH; w++) begin
      @(negedge clk);
      we = 1; waddr = AW'(w);
      wdata = $bits(wdata)'({$urandom, $urandom, $urandom});
      ref_mem[w] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      int ra;
      ra = int'($urandom_range(DEPTH - 1));
      raddr = AW'(ra);
      @(negedge clk);
      raddr = AW'($urandom);      // the next address must not matter yet
      #1;
      checks++;
      if (rdata !== ref_mem[ra]) begin
        failures++;
        if (failures < 5) $display("word %0d wrong", ra);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
