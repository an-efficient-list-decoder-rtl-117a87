// Self-checking test of the CAS unit: the {index, bit} of the input with
// the larger metric, that of CI_1 when they are equal.
module tb_cas;
  localparam int unsigned Z = 17, X1 = 14;
  logic [Z-1:0] si0, si1;
  logic [Z-X1-1:0] co;
  int checks = 0, failures = 0;

  cas #(.Z(Z), .X1(X1)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      si0 = Z'($urandom); si1 = Z'($urandom);
      if (n % 5 == 0) si1[Z-1 -: X1] = si0[Z-1 -: X1];
      #1;
      checks++;
      if (co != ((si0[Z-1 -: X1] > si1[Z-1 -: X1]) ? si0[Z-X1-1:0] : si1[Z-X1-1:0])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
