// tb_qclif_layer_full: end-to-end self-checking test of the qCLIF layer at
// its default sizes: 200 neurons, 200 stimulus inputs, 10 context inputs,
// 8-bit data and weights (82,000 synapses), for 600 cycles with a reset in
// the middle. Stimulus, cycle model and mechanism counts are those of
// tb_qclif_layer; here the layer is instantiated with no parameter
// overrides and the test sizes are taken from the package defaults.
module tb_qclif_layer_full;
  import qclif_pkg::*;

  localparam int NEURONS = NUM_NEURONS;
  localparam int NUM_SOM = NUM_SOM_IN;
  localparam int NUM_CTX = NUM_CTX_IN;
  localparam int N       = N_BITS;
  localparam int M       = M_BITS;
  localparam int CYCLES  = 600;
  localparam int WATCHDOG = 3 * CYCLES + 100;
  localparam int L    = clog3(NUM_SOM + NEURONS);   // SWM pipeline latency
  localparam int AMAX = (1 << (N - 1)) - 1;
  localparam int SMAX = (1 << (2 * N - 1)) - 1;
  localparam int IMAX = (1 << (N - 1)) - 1;
  localparam int IMIN = -(1 << (N - 1));
  localparam int WMAX = (1 << (M - 1)) - 1;

  logic clk = 0, rst = 1;
  logic                  in_spikes  [NUM_SOM];
  logic                  ctx_spikes [NUM_CTX];
  logic signed [M-1:0]   w_som      [NEURONS][NUM_SOM];
  logic signed [M-1:0]   w_rec      [NEURONS][NEURONS];
  logic signed [M-1:0]   w_ctx      [NEURONS][NUM_CTX];
  logic        [N-1:0]   ap_leak    [NEURONS];
  logic        [2*N-1:0] som_leak   [NEURONS];
  logic        [2*N-1:0] threshold  [NEURONS];
  logic                  out_spikes [NEURONS];
  logic        [N-1:0]   v_ap       [NEURONS];
  logic        [2*N-1:0] v_som      [NEURONS];

  qclif_layer dut (
    .clk(clk), .rst(rst), .in_spikes(in_spikes), .ctx_spikes(ctx_spikes),
    .w_som(w_som), .w_rec(w_rec), .w_ctx(w_ctx), .ap_leak(ap_leak),
    .som_leak(som_leak), .threshold(threshold), .out_spikes(out_spikes),
    .v_ap(v_ap), .v_som(v_som)
  );

  always #5 clk = ~clk;

  // model state
  int m_ap [NEURONS];
  int m_som [NEURONS];
  int m_spk [NEURONS];
  int h_sr [64][NEURONS];   // saturated somatic/recurrent sums by input cycle
  int h_ap [64][NEURONS];   // saturated apical sums by input cycle

  int checks = 0, failures = 0;
  int n_spike = 0, n_rec = 0, n_pos_sat = 0, n_neg_sat = 0;
  int n_ap_floor = 0, n_som_floor = 0, n_gated = 0, n_reset = 0;

  function automatic int sat(input int v);
    return (v > IMAX) ? IMAX : (v < IMIN) ? IMIN : v;
  endfunction

  task automatic model_reset();
    for (int n = 0; n < NEURONS; n++) begin
      m_ap[n] = 0;
      m_som[n] = 0;
      m_spk[n] = 0;
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;   // cycles since the last reset
    for (int n = 0; n < NEURONS; n++) begin
      for (int i = 0; i < NUM_SOM; i++) w_som[n][i] = M'($urandom);
      for (int j = 0; j < NEURONS; j++) w_rec[n][j] = M'($urandom_range(0, WMAX) - (WMAX + 1) / 2);
      for (int k = 0; k < NUM_CTX; k++) w_ctx[n][k] = M'($urandom_range(0, WMAX) - WMAX / 6);
      ap_leak[n]   = N'(7);                                   // paper's apical leak
      if (AMAX / 8 < 7) ap_leak[n] = N'(1);                   // narrow data paths
      som_leak[n]  = (2*N)'((n % 2) ? 200 : 7);               // paper's somatic leaks
      if (som_leak[n] > (2*N)'(SMAX / 8)) som_leak[n] = (2*N)'(SMAX / 8);  // narrow data paths
      threshold[n] = (2*N)'($urandom_range(SMAX / 32, SMAX / 5));
    end
    for (int i = 0; i < NUM_SOM; i++) in_spikes[i] = 1'b0;
    for (int k = 0; k < NUM_CTX; k++) ctx_spikes[k] = 1'b0;
    model_reset();
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    t = 0;
    for (int c = 0; c < CYCLES; c++) begin
      int dens, ctx_on;
      // mid-run reset
      if (c == CYCLES / 2) begin
        rst = 1;
        @(negedge clk);
        rst = 0;
        model_reset();
        t = 0;
        n_reset++;
        for (int n = 0; n < NEURONS; n++) begin
          checks += 3;
          if (v_ap[n] != 0 || v_som[n] != 0 || out_spikes[n] != 0) failures++;
        end
      end
      dens   = (c / 200) % 4;                 // stimulus density phase
      ctx_on = ((c / 150) % 3) != 2;          // context absent one phase in three
      for (int i = 0; i < NUM_SOM; i++) in_spikes[i] = ($urandom_range(0, 15) < 2 * dens + 1);
      for (int k = 0; k < NUM_CTX; k++) ctx_spikes[k] = ctx_on && ($urandom_range(0, 1) == 1);
      // compare the registered outputs with the model state
      for (int n = 0; n < NEURONS; n++) begin
        checks += 3;
        if (int'(v_ap[n]) != m_ap[n] || int'(v_som[n]) != m_som[n] || int'(out_spikes[n]) != m_spk[n]) begin
          failures++;
          if (failures < 10)
            $display("FAIL c=%0d n=%0d ap %0d/%0d som %0d/%0d spk %0d/%0d", c, n, v_ap[n], m_ap[n],
                     v_som[n], m_som[n], out_spikes[n], m_spk[n]);
        end
      end
      // model: weighted sums of this cycle's spikes enter the pipeline
      for (int n = 0; n < NEURONS; n++) begin
        int sr, ap;
        sr = 0;
        ap = 0;
        for (int i = 0; i < NUM_SOM; i++) if (in_spikes[i]) sr += int'(w_som[n][i]);
        for (int j = 0; j < NEURONS; j++) if (m_spk[j] != 0) sr += int'(w_rec[n][j]);
        for (int k = 0; k < NUM_CTX; k++) if (ctx_spikes[k]) ap += int'(w_ctx[n][k]);
        if (sr > IMAX) n_pos_sat++;
        if (sr < IMIN) n_neg_sat++;
        h_sr[t % 64][n] = sat(sr);
        h_ap[t % 64][n] = sat(ap);
      end
      for (int j = 0; j < NEURONS; j++) n_rec += m_spk[j];
      // model: neurons consume the sums of the cycle L cycles ago
      @(posedge clk);
      for (int n = 0; n < NEURONS; n++) begin
        int si, ai, raw_a, an, raw_s, s, sp;
        si = (t >= L) ? h_sr[(t - L) % 64][n] : 0;
        ai = (t >= L) ? h_ap[(t - L) % 64][n] : 0;
        raw_a = m_ap[n] - int'(ap_leak[n]) + ai;
        an = (raw_a < 0) ? 0 : (raw_a > AMAX) ? AMAX : raw_a;
        raw_s = m_som[n] - int'(som_leak[n]) + an * si;
        s = (raw_s < 0) ? 0 : (raw_s > SMAX) ? SMAX : raw_s;
        sp = (s > int'(threshold[n])) ? 1 : 0;
        if (raw_a < 0) n_ap_floor++;
        if (raw_s < 0) n_som_floor++;
        if (an == 0 && si != 0) n_gated++;
        n_spike += sp;
        m_ap[n] = an;
        m_som[n] = sp ? 0 : s;
        m_spk[n] = sp;
      end
      t++;
      @(negedge clk);
    end
    checks += 8;
    if (n_spike == 0)     begin failures++; $display("FAIL no spikes"); end
    if (n_rec == 0)       begin failures++; $display("FAIL no recurrent spikes"); end
    if (n_pos_sat == 0)   begin failures++; $display("FAIL no positive saturation"); end
    if (n_neg_sat == 0)   begin failures++; $display("FAIL no negative saturation"); end
    if (n_ap_floor == 0)  begin failures++; $display("FAIL no apical floor"); end
    if (n_som_floor == 0) begin failures++; $display("FAIL no somatic floor"); end
    if (n_gated == 0)     begin failures++; $display("FAIL no context gating"); end
    if (n_reset == 0)     begin failures++; $display("FAIL no reset"); end
    $display("spikes %0d, recurrent spikes fed back %0d, saturations +%0d/-%0d", n_spike, n_rec,
             n_pos_sat, n_neg_sat);
    $display("apical floors %0d, somatic floors %0d, gated %0d, resets %0d", n_ap_floor,
             n_som_floor, n_gated, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
