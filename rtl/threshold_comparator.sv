// threshold_comparator (TC): spike decision of a qCLIF neuron.
//
// Raises spike when the somatic accumulator output is strictly greater than
// the 2N-bit threshold ("surpasses" the threshold). Combinational; the same
// signal is the neuron's output spike and the reset of the somatic register.
// Both values are unsigned: the somatic potential is never negative. The
// strict comparison and the unsigned encoding are this design's reading.
module threshold_comparator
  import qclif_pkg::*;
#(
  parameter int unsigned N = N_BITS
) (
  input  logic [2*N-1:0] sa_out,
  input  logic [2*N-1:0] threshold,
  output logic           spike
);

  always_comb spike = (sa_out > threshold);

endmodule
