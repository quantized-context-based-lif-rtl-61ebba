// qclif_neuron: one quantized context-dependent leaky integrate-and-fire neuron.
//
// Per clock cycle (one network time step):
//   V_ap'  = max(0, V_ap - apical_leak + apical_input)              (AC)
//   P      = V_ap' * somatic_input                                   (MU)
//   S      = max(0, V_som - somatic_leak + P)                        (SC)
//   spike  = S > threshold                                           (TC)
//   V_som' = spike ? 0 : S
// The apical potential, floored at zero, is the ReLU gate: the stimulus only
// reaches the soma while context has charged the apical compartment.
//
// Structure and widths (N-bit apical path, N x N multiplier, 2N-bit somatic
// path and threshold) follow the paper's neuron diagram. The spike output is
// combinational from the current inputs and state; the layer registers it.
//
// Ports: ap_in, som_in (N-bit signed weighted sums from the SWMs), ap_leak
// (N bits), som_leak and threshold (2N bits), spike, and the two potentials
// v_ap, v_som for observation. An assertion checks the reset to zero after
// every spike.
module qclif_neuron
  import qclif_pkg::*;
#(
  parameter int unsigned N = N_BITS
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic signed [N-1:0]   ap_in,
  input  logic signed [N-1:0]   som_in,
  input  logic        [N-1:0]   ap_leak,
  input  logic        [2*N-1:0] som_leak,
  input  logic        [2*N-1:0] threshold,
  output logic                  spike,
  output logic        [N-1:0]   v_ap,
  output logic        [2*N-1:0] v_som
);

  logic [N-1:0]          v_ap_next;
  logic signed [2*N-1:0] prod;
  logic [2*N-1:0]        sa_out;

  apical_compartment #(.N(N)) u_ac (
    .clk       (clk),
    .rst       (rst),
    .ap_in     (ap_in),
    .ap_leak   (ap_leak),
    .v_ap_next (v_ap_next),
    .v_ap      (v_ap)
  );

  multiplication_unit #(.N(N)) u_mu (
    .a (signed'(v_ap_next)),
    .b (som_in),
    .p (prod)
  );

  somatic_compartment #(.N(N)) u_sc (
    .clk      (clk),
    .rst      (rst),
    .prod     (prod),
    .som_leak (som_leak),
    .spike    (spike),
    .sa_out   (sa_out),
    .v_som    (v_som)
  );

  threshold_comparator #(.N(N)) u_tc (
    .sa_out    (sa_out),
    .threshold (threshold),
    .spike     (spike)
  );

  // reset to zero: the cycle after a spike the somatic potential is zero
  a_reset_on_spike: assert property (@(posedge clk) disable iff (rst) spike |=> (v_som == '0))
    else $error("somatic potential not reset after a spike");

endmodule
