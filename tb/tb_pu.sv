// Self-checking test of one PU at p = 13: random LLM pairs, both modes and
// both partial sums, compared with F and G worked out here; then extreme
// inputs (all ones) to show the (p+1)-bit output cannot overflow.
module tb_pu;
  localparam int unsigned P = 13;
  logic [1:0][P-1:0] a, b;
  logic u, mode;
  logic [1:0][P:0] c;
  int checks = 0, failures = 0;

  pu #(.P(P)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    int e0, e1;
    int a0, a1, b0, b1;
    a0 = int'(a[0]); a1 = int'(a[1]); b0 = int'(b[0]); b1 = int'(b[1]);
    if (mode) begin
      e0 = (u ? a1 : a0) + b0;
      e1 = (u ? a0 : a1) + b1;
    end else begin
      e0 = (a0 + b0 > a1 + b1) ? a0 + b0 : a1 + b1;
      e1 = (a1 + b0 > a0 + b1) ? a1 + b0 : a0 + b1;
    end
    checks++;
    if (int'(c[0]) != e0 || int'(c[1]) != e1) begin
      failures++;
      if (failures < 10)
        $display("mode=%0d u=%0d a=%0d,%0d b=%0d,%0d: got %0d,%0d want %0d,%0d",
                 mode, u, a0, a1, b0, b1, c[0], c[1], e0, e1);
    end
  endtask

  initial begin
    for (int n = 0; n < 4000; n++) begin
      a[0] = P'($urandom); a[1] = P'($urandom); b[0] = P'($urandom); b[1] = P'($urandom);
      mode = n[0]; u = n[1];
      #1 check_one();
    end
    a = '1; b = '1;
    for (int m = 0; m < 4; m++) begin mode = m[0]; u = m[1]; #1 check_one(); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
