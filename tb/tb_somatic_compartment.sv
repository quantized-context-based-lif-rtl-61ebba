// tb_somatic_compartment: self-checking test of the somatic compartment.
// Random products, leaks and spike pulses are applied; every cycle sa_out
// and the register are compared with the model
// s = min(32767, max(0, v - leak + prod)), v' = spike ? 0 : s   (N = 8).
// The floor at zero, the saturation and the reset on spike must each occur.
module tb_somatic_compartment;
  localparam int N = 8;
  localparam int VMAX = (1 << (2 * N - 1)) - 1;
  logic clk = 0, rst = 1, spike = 0;
  logic signed [2*N-1:0] prod = '0;
  logic [2*N-1:0] som_leak = '0, sa_out, v_som;
  int checks = 0, failures = 0, model_v = 0, n_floor = 0, n_sat = 0, n_reset = 0;

  somatic_compartment #(.N(N)) dut (.clk(clk), .rst(rst), .prod(prod), .som_leak(som_leak),
                                    .spike(spike), .sa_out(sa_out), .v_som(v_som));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int c = 0; c < 3000; c++) begin
      int raw, s;
      case ((c / 150) % 3)
        0: prod = (2*N)'($urandom_range(0, 16129));
        1: prod = (2*N)'(-$signed($urandom_range(0, 16384)));
        default: prod = (2*N)'($urandom_range(0, 4000));
      endcase
      som_leak = (2*N)'($urandom_range(0, 300));
      spike = ($urandom_range(0, 19) == 0);
      #1;
      raw = model_v - int'(som_leak) + int'(prod);
      s = (raw < 0) ? 0 : (raw > VMAX) ? VMAX : raw;
      if (raw < 0) n_floor++;
      if (raw > VMAX) n_sat++;
      if (spike && s != 0) n_reset++;
      checks += 2;
      if (int'(v_som) != model_v) begin
        failures++;
        $display("FAIL c=%0d v_som=%0d model=%0d", c, v_som, model_v);
      end
      if (int'(sa_out) != s) begin
        failures++;
        $display("FAIL c=%0d sa_out=%0d model=%0d", c, sa_out, s);
      end
      @(posedge clk);
      model_v = spike ? 0 : s;
      @(negedge clk);
    end
    checks += 3;
    if (n_floor == 0) failures++;
    if (n_sat == 0) failures++;
    if (n_reset == 0) failures++;
    $display("floor %0d, saturation %0d, spike resets %0d", n_floor, n_sat, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
