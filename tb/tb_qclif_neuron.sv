// tb_qclif_neuron: self-checking test of one qCLIF neuron (N = 8).
// Random apical and somatic inputs are applied in phases with and without
// context; every cycle the spike (combinational) and both potentials are
// compared with an integer model of the neuron equations:
//   a' = clamp(a - aleak + ap_in, 0, 127)
//   s  = clamp(v - sleak + a' * som_in, 0, 32767)
//   spike = s > th ;  v' = spike ? 0 : s
// Spikes, gating by a zero apical potential, and both floors must occur.
module tb_qclif_neuron;
  localparam int N = 8;
  localparam int AMAX = (1 << (N - 1)) - 1;
  localparam int SMAX = (1 << (2 * N - 1)) - 1;
  logic clk = 0, rst = 1;
  logic signed [N-1:0] ap_in = '0, som_in = '0;
  logic [N-1:0] ap_leak = 8'd7;
  logic [2*N-1:0] som_leak = 16'd200, threshold = 16'd3000;
  logic spike;
  logic [N-1:0] v_ap;
  logic [2*N-1:0] v_som;
  int checks = 0, failures = 0;
  int ma = 0, mv = 0;
  int n_spike = 0, n_gated = 0, n_ap_floor = 0, n_som_floor = 0;

  qclif_neuron #(.N(N)) dut (.clk(clk), .rst(rst), .ap_in(ap_in), .som_in(som_in),
                             .ap_leak(ap_leak), .som_leak(som_leak), .threshold(threshold),
                             .spike(spike), .v_ap(v_ap), .v_som(v_som));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int c = 0; c < 6000; c++) begin
      int an, raw_a, s, raw_s, sp;
      if (((c / 250) % 2) == 0) ap_in = N'($urandom_range(0, 30));   // context present
      else ap_in = ($urandom_range(0, 9) == 0) ? N'($urandom_range(0, 10)) : '0;
      som_in = N'($urandom_range(0, 120) - 40);
      if (c % 500 == 0) begin
        ap_leak   = N'($urandom_range(1, 10));
        som_leak  = (2*N)'($urandom_range(50, 300));
        threshold = (2*N)'($urandom_range(500, 8000));
      end
      #1;
      raw_a = ma - int'(ap_leak) + int'(ap_in);
      an = (raw_a < 0) ? 0 : (raw_a > AMAX) ? AMAX : raw_a;
      raw_s = mv - int'(som_leak) + an * int'(som_in);
      s = (raw_s < 0) ? 0 : (raw_s > SMAX) ? SMAX : raw_s;
      sp = (s > int'(threshold)) ? 1 : 0;
      if (raw_a < 0) n_ap_floor++;
      if (raw_s < 0) n_som_floor++;
      if (an == 0 && som_in != 0) n_gated++;
      n_spike += sp;
      checks += 3;
      if (int'(v_ap) != ma) begin failures++; $display("FAIL c=%0d v_ap %0d/%0d", c, v_ap, ma); end
      if (int'(v_som) != mv) begin failures++; $display("FAIL c=%0d v_som %0d/%0d", c, v_som, mv); end
      if (int'(spike) != sp) begin failures++; $display("FAIL c=%0d spike %0d/%0d", c, spike, sp); end
      @(posedge clk);
      ma = an;
      mv = sp ? 0 : s;
      @(negedge clk);
    end
    checks += 4;
    if (n_spike == 0) failures++;
    if (n_gated == 0) failures++;
    if (n_ap_floor == 0) failures++;
    if (n_som_floor == 0) failures++;
    $display("spikes %0d, gated cycles %0d, apical floors %0d, somatic floors %0d",
             n_spike, n_gated, n_ap_floor, n_som_floor);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
