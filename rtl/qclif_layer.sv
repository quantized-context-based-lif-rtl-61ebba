// qclif_layer: a recurrent spiking layer of quantized context-dependent LIF neurons.
//
// NEURONS qCLIF neurons share two spike weighting modules (SWMs):
//  * the somatic/recurrent SWM sums, for every neuron, its weights gated by
//    the NUM_SOM external stimulus spikes and by the layer's own spikes of
//    the previous cycle (recurrent feedback, all-to-all including self);
//  * the apical SWM sums, for every neuron, its weights gated by the NUM_CTX
//    context spikes.
// Each neuron takes the two N-bit sums as its somatic and apical inputs. The
// neurons' spikes are registered (out_spikes) and fed back into the
// somatic/recurrent SWM.
//
// Timing. One clock cycle is one network time step. The SWM adder trees are
// pipelined, clog3(K) stages for K inputs; the shorter apical path is padded
// with registers so both sums of the stimulus vector presented in cycle t
// reach the neurons together, L = clog3(NUM_SOM + NEURONS) cycles later
// (6 at the default sizes). A spike produced in cycle t appears on
// out_spikes after the clock edge ending cycle t and enters the SWM in cycle
// t+1, so it influences the neurons' somatic input L cycles after that.
//
// From the paper: the two SWMs, the AND gating, the neuron structure, the
// per-neuron leaks, the widths (M-bit weights, N-bit inputs and apical leak,
// 2N-bit somatic leak and threshold) and the 200-neuron, 8-bit
// configuration. This design's choices: the weights, leaks and thresholds
// are plain input ports (the paper does not say where they are stored), the
// path alignment, the registered spike output, and a synchronous active-high
// reset that clears every potential, pipeline register and spike.
module qclif_layer
  import qclif_pkg::*;
#(
  parameter int unsigned NEURONS = NUM_NEURONS,
  parameter int unsigned NUM_SOM = NUM_SOM_IN,
  parameter int unsigned NUM_CTX = NUM_CTX_IN,
  parameter int unsigned N       = N_BITS,
  parameter int unsigned M       = M_BITS
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  in_spikes  [NUM_SOM],
  input  logic                  ctx_spikes [NUM_CTX],
  input  logic signed [M-1:0]   w_som      [NEURONS][NUM_SOM],
  input  logic signed [M-1:0]   w_rec      [NEURONS][NEURONS],
  input  logic signed [M-1:0]   w_ctx      [NEURONS][NUM_CTX],
  input  logic        [N-1:0]   ap_leak    [NEURONS],
  input  logic        [2*N-1:0] som_leak   [NEURONS],
  input  logic        [2*N-1:0] threshold  [NEURONS],
  output logic                  out_spikes [NEURONS],
  output logic        [N-1:0]   v_ap       [NEURONS],
  output logic        [2*N-1:0] v_som      [NEURONS]
);

  localparam int unsigned K_SR   = NUM_SOM + NEURONS;
  localparam int unsigned L_SR   = clog3(K_SR);
  localparam int unsigned L_AP   = clog3(NUM_CTX);
  localparam int unsigned DLY_SR = (L_AP > L_SR) ? L_AP - L_SR : 0;
  localparam int unsigned DLY_AP = (L_SR > L_AP) ? L_SR - L_AP : 0;

  logic                sr_spikes  [K_SR];
  logic signed [M-1:0] sr_weights [NEURONS][K_SR];
  logic signed [N-1:0] som_in     [NEURONS];
  logic signed [N-1:0] ap_in      [NEURONS];
  logic                spike      [NEURONS];

  // stimulus spikes first, then the recurrent spikes of the previous cycle
  always_comb begin
    for (int unsigned i = 0; i < NUM_SOM; i++) sr_spikes[i] = in_spikes[i];
    for (int unsigned j = 0; j < NEURONS; j++) sr_spikes[NUM_SOM + j] = out_spikes[j];
    for (int unsigned n = 0; n < NEURONS; n++) begin
      for (int unsigned i = 0; i < NUM_SOM; i++) sr_weights[n][i] = w_som[n][i];
      for (int unsigned j = 0; j < NEURONS; j++) sr_weights[n][NUM_SOM + j] = w_rec[n][j];
    end
  end

  spike_weighting_module #(
    .LANES(NEURONS), .K(K_SR), .M(M), .N(N), .EXTRA_DELAY(DLY_SR)
  ) u_swm_som (
    .clk     (clk),
    .rst     (rst),
    .spikes  (sr_spikes),
    .weights (sr_weights),
    .sum_out (som_in)
  );

  spike_weighting_module #(
    .LANES(NEURONS), .K(NUM_CTX), .M(M), .N(N), .EXTRA_DELAY(DLY_AP)
  ) u_swm_ap (
    .clk     (clk),
    .rst     (rst),
    .spikes  (ctx_spikes),
    .weights (w_ctx),
    .sum_out (ap_in)
  );

  for (genvar n = 0; n < NEURONS; n++) begin : g_neuron
    qclif_neuron #(.N(N)) u_neuron (
      .clk       (clk),
      .rst       (rst),
      .ap_in     (ap_in[n]),
      .som_in    (som_in[n]),
      .ap_leak   (ap_leak[n]),
      .som_leak  (som_leak[n]),
      .threshold (threshold[n]),
      .spike     (spike[n]),
      .v_ap      (v_ap[n]),
      .v_som     (v_som[n])
    );
  end

  always_ff @(posedge clk) begin
    for (int unsigned n = 0; n < NEURONS; n++) begin
      if (rst) out_spikes[n] <= 1'b0;
      else     out_spikes[n] <= spike[n];
    end
  end

endmodule
