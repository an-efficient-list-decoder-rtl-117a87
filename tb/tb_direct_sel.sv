// Self-checking test of direct selection (L = 4, 480 data bits): every
// pattern of CRC flags, the first passing path must be chosen, path 0 with
// fail = 1 when none passes.
module tb_direct_sel;
  localparam int unsigned L = 4, KD = 480;
  logic [L-1:0] cs;
  logic [L-1:0][KD-1:0] bits;
  logic [1:0] sel;
  logic fail;
  logic [KD-1:0] data;
  int checks = 0, failures = 0;

  direct_sel #(.L(L), .KD(KD)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 64; n++) begin
      int first;
      cs = 4'(n);
      for (int l = 0; l < L; l++) for (int w = 0; w < KD; w += 32) bits[l][w +: 32] = $urandom;
      first = -1;
      for (int l = L - 1; l >= 0; l--) if (!cs[l]) first = l;
      #1;
      checks += 3;
      if (fail != (first < 0)) failures++;
      if (int'(sel) != ((first < 0) ? 0 : first)) failures++;
      if (data != bits[(first < 0) ? 0 : first]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
