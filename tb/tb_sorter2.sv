// Self-checking test of the IS and DS sorters: random entries, some with
// equal metrics; the outputs must be the inputs in the required order, and
// equal metrics must pass straight through.
module tb_sorter2;
  localparam int unsigned Z = 17, X1 = 14;
  logic [Z-1:0] si0, si1, is0, is1, ds0, ds1;
  int checks = 0, failures = 0;

  sorter2 #(.Z(Z), .X1(X1), .DESC(1'b0)) u_is (.si0, .si1, .so0(is0), .so1(is1));
  sorter2 #(.Z(Z), .X1(X1), .DESC(1'b1)) u_ds (.si0, .si1, .so0(ds0), .so1(ds1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int m0, m1;
      si0 = Z'($urandom); si1 = Z'($urandom);
      if (n % 5 == 0) si1[Z-1 -: X1] = si0[Z-1 -: X1];
      m0 = int'(si0[Z-1 -: X1]); m1 = int'(si1[Z-1 -: X1]);
      #1;
      checks += 2;
      if (m0 > m1 ? (is0 != si1 || is1 != si0) : (is0 != si0 || is1 != si1)) failures++;
      if (m0 < m1 ? (ds0 != si1 || ds1 != si0) : (ds0 != si0 || ds1 != si1)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
