// tb_multiplication_unit: exhaustive self-checking test of the N x N signed
// array multiplier at N = 8: every one of the 65,536 operand pairs is
// compared with the product computed by integer multiplication.
module tb_multiplication_unit;
  localparam int N = 8;
  logic signed [N-1:0] a, b;
  logic signed [2*N-1:0] p;
  int checks = 0, failures = 0;

  multiplication_unit #(.N(N)) dut (.a(a), .b(b), .p(p));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -(1 << (N - 1)); i < (1 << (N - 1)); i++) begin
      for (int j = -(1 << (N - 1)); j < (1 << (N - 1)); j++) begin
        a = N'(i);
        b = N'(j);
        #1;
        checks++;
        if (int'(p) != i * j) begin
          failures++;
          if (failures < 10) $display("FAIL %0d * %0d = %0d", i, j, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
