// Self-checking test of the data-bit store at the default size (L = 4,
// 480 data bits): random copies and bits at every step, compared at the end
// with histories kept here (row l, position j = j-th bit).
module tb_path_bits;
  localparam int unsigned L = 4, KD = 480;
  logic clk = 0, step = 0;
  logic [L-1:0][1:0] a = '0;
  logic [L-1:0] c = '0;
  logic [L-1:0][KD-1:0] bits;
  int checks = 0, failures = 0;
  bit hist [L][KD];

  path_bits #(.L(L), .KD(KD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int fr = 0; fr < 10; fr++) begin
      for (int j = 0; j < KD; j++) begin
        bit nh [L][KD];
        for (int l = 0; l < L; l++) begin
          a[l] = 2'($urandom); c[l] = 1'($urandom);
          nh[l] = hist[a[l]];
          nh[l][j] = c[l];
        end
        step = 1;
        @(negedge clk);
        step = 0;
        hist = nh;
        if ($urandom_range(3) == 0) @(negedge clk);  // idle cycles must hold
      end
      for (int l = 0; l < L; l++)
        for (int j = 0; j < KD; j++) begin
          checks++;
          if (bits[l][j] != hist[l][j]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
