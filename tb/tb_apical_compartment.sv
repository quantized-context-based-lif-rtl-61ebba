// tb_apical_compartment: self-checking test of the apical compartment.
// Random inputs and leaks are applied for many cycles; the combinational
// new potential and the registered potential are compared every cycle with
// an integer model: v' = min(127, max(0, v - leak + in)) at N = 8. Phases of
// strongly positive and strongly negative input make both the zero floor
// and the upper saturation happen; their counts must be non-zero.
module tb_apical_compartment;
  localparam int N = 8;
  localparam int VMAX = (1 << (N - 1)) - 1;
  logic clk = 0, rst = 1;
  logic signed [N-1:0] ap_in = '0;
  logic [N-1:0] ap_leak = '0, v_ap_next, v_ap;
  int checks = 0, failures = 0, model_v = 0, n_floor = 0, n_sat = 0;

  apical_compartment #(.N(N)) dut (.clk(clk), .rst(rst), .ap_in(ap_in), .ap_leak(ap_leak),
                                   .v_ap_next(v_ap_next), .v_ap(v_ap));

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
      int raw, nxt;
      case ((c / 200) % 3)
        0: ap_in = N'($urandom_range(0, 60));                 // charging
        1: ap_in = N'(-$signed($urandom_range(0, 128)));      // discharging
        default: ap_in = N'($urandom);
      endcase
      ap_leak = N'(((c / 100) % 2) ? $urandom_range(0, 15) : $urandom_range(0, 255));
      #1;
      raw = model_v - int'(ap_leak) + int'(ap_in);
      nxt = (raw < 0) ? 0 : (raw > VMAX) ? VMAX : raw;
      if (raw < 0) n_floor++;
      if (raw > VMAX) n_sat++;
      checks += 2;
      if (int'(v_ap) != model_v) begin
        failures++;
        $display("FAIL c=%0d v_ap=%0d model=%0d", c, v_ap, model_v);
      end
      if (int'(v_ap_next) != nxt) begin
        failures++;
        $display("FAIL c=%0d v_ap_next=%0d model=%0d", c, v_ap_next, nxt);
      end
      @(posedge clk);
      model_v = nxt;
      @(negedge clk);
    end
    // synchronous reset clears the potential
    rst = 1;
    @(negedge clk);
    checks++;
    if (v_ap != 0) failures++;
    checks += 2;
    if (n_floor == 0) failures++;
    if (n_sat == 0) failures++;
    $display("floor events %0d, saturation events %0d", n_floor, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
