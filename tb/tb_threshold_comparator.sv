// tb_threshold_comparator: self-checking test of the threshold comparator.
// Drives corner values (equal, one above, one below, extremes) and random
// pairs at N = 8 and compares the spike with an independent "greater than".
module tb_threshold_comparator;
  localparam int unsigned N = 8;
  logic [2*N-1:0] sa_out, threshold;
  logic spike;
  int checks = 0, failures = 0;

  threshold_comparator #(.N(N)) dut (.sa_out(sa_out), .threshold(threshold), .spike(spike));

  task automatic check(input int unsigned s, input int unsigned t);
    sa_out = (2*N)'(s);
    threshold = (2*N)'(t);
    #1;
    checks++;
    if (spike !== (s > t)) begin
      failures++;
      $display("FAIL sa=%0d th=%0d spike=%0b", s, t, spike);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0); check(1, 0); check(0, 1); check(100, 100); check(101, 100); check(99, 100);
    check(65535, 65534); check(65534, 65535); check(65535, 65535); check(32768, 32767);
    for (int i = 0; i < 2000; i++) begin
      int unsigned t;
      t = $urandom_range(0, 65535);
      check($urandom_range(0, 65535), t);
      check(t, t);
      if (t < 65535) check(t + 1, t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
