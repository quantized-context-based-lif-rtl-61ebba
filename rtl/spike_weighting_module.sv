// spike_weighting_module (SWM): weighted spike sums for a row of neurons.
//
// For every one of LANES neurons, each of the K binary input spikes gates its
// M-bit signed synaptic weight with a bitwise AND (a spike selects the weight,
// no spike gives zero), and the K gated weights are summed in a pipelined
// carry-save adder tree of clog3(K) stages. The full-precision sum is then
// saturated to the N-bit signed input width of the neuron and, if
// EXTRA_DELAY > 0, delayed by that many further registers so that two SWMs
// with different K can be aligned in time.
//
// The paper gives the AND gating, the carry-save adders and the log3 pipeline
// depth, and prints the N-bit width of the SWM outputs. Saturation (rather
// than wrap-around) when the sum leaves the N-bit range, and the alignment
// delay, are this design's choices.
//
// Ports: spikes[K] (shared by all lanes), weights[LANES][K], sum_out[LANES]
// (N-bit signed). Latency: LATENCY = clog3(K) + EXTRA_DELAY cycles from
// spikes/weights to sum_out; one new spike vector per cycle.
module spike_weighting_module
  import qclif_pkg::*;
#(
  parameter int unsigned LANES       = NUM_NEURONS,
  parameter int unsigned K           = NUM_SOM_IN + NUM_NEURONS,
  parameter int unsigned M           = M_BITS,
  parameter int unsigned N           = N_BITS,
  parameter int unsigned EXTRA_DELAY = 0
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                spikes  [K],
  input  logic signed [M-1:0] weights [LANES][K],
  output logic signed [N-1:0] sum_out [LANES]
);

  localparam int unsigned OW = M + clog2p(K) + 1;

  localparam logic signed [OW-1:0] SAT_MAX = OW'((longint'(1) << (N - 1)) - 1);
  localparam logic signed [OW-1:0] SAT_MIN = -OW'(longint'(1) << (N - 1));

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [M-1:0]  gated [K];
    logic signed [OW-1:0] full_sum;
    logic signed [N-1:0]  sat_sum;

    // synapse: bitwise AND of the spike with every weight bit
    always_comb begin
      for (int unsigned i = 0; i < K; i++) gated[i] = weights[l][i] & {M{spikes[i]}};
    end

    csa_adder_tree #(.K(K), .W(M), .OW(OW)) u_tree (
      .clk    (clk),
      .rst    (rst),
      .in_ops (gated),
      .sum    (full_sum)
    );

    always_comb begin
      if (full_sum > SAT_MAX)      sat_sum = SAT_MAX[N-1:0];
      else if (full_sum < SAT_MIN) sat_sum = SAT_MIN[N-1:0];
      else                         sat_sum = full_sum[N-1:0];
    end

    if (EXTRA_DELAY == 0) begin : g_nodly
      assign sum_out[l] = sat_sum;
    end else begin : g_dly
      logic signed [N-1:0] dly [EXTRA_DELAY];
      always_ff @(posedge clk) begin
        if (rst) begin
          for (int unsigned d = 0; d < EXTRA_DELAY; d++) dly[d] <= '0;
        end else begin
          dly[0] <= sat_sum;
          for (int unsigned d = 1; d < EXTRA_DELAY; d++) dly[d] <= dly[d-1];
        end
      end
      assign sum_out[l] = dly[EXTRA_DELAY-1];
    end
  end

endmodule
