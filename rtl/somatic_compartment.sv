// somatic_compartment (SC): the stimulus-integrating compartment of a qCLIF neuron.
//
// Implements V_som(t+1) = max(0, V_som(t) - somatic_leak + product), where the
// product comes from the multiplication unit. The Somatic Leakage Subtractor
// (SLS) removes the constant leak, the Somatic Accumulator (SA) adds the
// product, and the 2N-bit register stores the sum. Negative sums become zero.
// The SA output (sa_out) goes to the threshold comparator in the same cycle;
// when the comparator fires (spike = 1) the register is loaded with zero
// instead ("reset to zero").
//
// Follows the paper: SLS -> SA -> register, linear leak, floor at zero, reset
// on spike, 2N-bit widths. This design's choices: two guard bits with
// saturation at the largest positive 2N-bit signed value, an unsigned leak,
// and a synchronous reset input that also clears the potential.
//
// Ports: prod (2N-bit signed), som_leak (2N-bit unsigned), spike (from the
// comparator), sa_out (combinational), v_som (registered potential).
module somatic_compartment
  import qclif_pkg::*;
#(
  parameter int unsigned N = N_BITS
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic signed [2*N-1:0] prod,
  input  logic        [2*N-1:0] som_leak,
  input  logic                  spike,
  output logic        [2*N-1:0] sa_out,
  output logic        [2*N-1:0] v_som
);

  localparam int unsigned W2 = 2 * N;
  localparam logic signed [W2+1:0] VMAX = (W2+2)'((longint'(1) << (W2 - 1)) - 1);

  logic signed [W2+1:0] sls_out;  // somatic leakage subtractor
  logic signed [W2+1:0] sa_sum;   // somatic accumulator

  always_comb begin
    sls_out = signed'({2'b00, v_som}) - signed'({2'b00, som_leak});
    sa_sum  = sls_out + (W2+2)'(prod);
    if (sa_sum[W2+1])        sa_out = '0;
    else if (sa_sum > VMAX)  sa_out = VMAX[W2-1:0];
    else                     sa_out = sa_sum[W2-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst || spike) v_som <= '0;
    else              v_som <= sa_out;
  end

endmodule
