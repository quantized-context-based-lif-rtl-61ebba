// tb_spike_weighting_module: self-checking test of the spike weighting module.
// Uses 3 lanes and K = 14 inputs (clog3(14) = 3 tree stages) plus 2 extra
// delay registers, so the latency must be 5 cycles. Every cycle each lane's
// output is compared with sat8(sum of the weights whose spike was set) of the
// input vector presented 5 cycles earlier. Weights change every cycle too,
// so the weights must be sampled together with their spikes. A separate
// impulse test measures the latency directly. Saturation at both ends must
// occur.
module tb_spike_weighting_module;
  localparam int LANES = 3, K = 14, M = 8, N = 8, XD = 2, LAT = 3 + XD;
  logic clk = 0, rst = 1;
  logic spikes [K];
  logic signed [M-1:0] weights [LANES][K];
  logic signed [N-1:0] sum_out [LANES];
  int checks = 0, failures = 0, n_pos_sat = 0, n_neg_sat = 0;
  int hist [64][LANES];   // expected outputs indexed by input cycle mod 64

  spike_weighting_module #(.LANES(LANES), .K(K), .M(M), .N(N), .EXTRA_DELAY(XD)) dut (
    .clk(clk), .rst(rst), .spikes(spikes), .weights(weights), .sum_out(sum_out));

  always #5 clk = ~clk;

  function automatic int sat(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  task automatic drive_zero();
    for (int i = 0; i < K; i++) spikes[i] = 1'b0;
    for (int l = 0; l < LANES; l++) for (int i = 0; i < K; i++) weights[l][i] = '0;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e[LANES];
    drive_zero();
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int c = 0; c < 3000; c++) begin
      int dens, sum;
      int ex[LANES];
      dens = (c / 300) % 4;
      for (int i = 0; i < K; i++) spikes[i] = ($urandom_range(0, 7) < 2 * dens + 1);
      for (int l = 0; l < LANES; l++)
        for (int i = 0; i < K; i++) begin
          if ((c / 100) % 3 == 0)      weights[l][i] = M'($urandom_range(40, 127));
          else if ((c / 100) % 3 == 1) weights[l][i] = M'(-$signed($urandom_range(40, 128)));
          else                         weights[l][i] = M'($urandom);
        end
      for (int l = 0; l < LANES; l++) begin
        sum = 0;
        for (int i = 0; i < K; i++) if (spikes[i]) sum += int'(weights[l][i]);
        if (sum > 127) n_pos_sat++;
        if (sum < -128) n_neg_sat++;
        ex[l] = sat(sum);
      end
      for (int l = 0; l < LANES; l++) begin
        hist[c % 64][l] = ex[l];
        // before LAT cycles have passed the pipeline still holds reset zeros
        e[l] = (c >= LAT) ? hist[(c - LAT) % 64][l] : 0;
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (int'(sum_out[l]) != e[l]) begin
          failures++;
          if (failures < 10) $display("FAIL c=%0d lane %0d out=%0d exp=%0d", c, l, sum_out[l], e[l]);
        end
      end
      @(negedge clk);
    end
    // impulse: count cycles until the output answers
    drive_zero();
    repeat (LAT + 2) @(negedge clk);
    spikes[5] = 1'b1;
    weights[1][5] = 8'sd77;
    @(negedge clk);
    drive_zero();
    begin
      int lat = 1;
      while (sum_out[1] == 0 && lat < 20) begin
        @(negedge clk);
        lat++;
      end
      checks += 2;
      if (lat != LAT) begin failures++; $display("FAIL latency %0d expected %0d", lat, LAT); end
      if (sum_out[1] != 77) begin failures++; $display("FAIL impulse value %0d", sum_out[1]); end
      $display("measured latency %0d cycles", lat);
    end
    checks += 2;
    if (n_pos_sat == 0) failures++;
    if (n_neg_sat == 0) failures++;
    $display("positive saturations %0d, negative saturations %0d", n_pos_sat, n_neg_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
