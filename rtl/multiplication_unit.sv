// multiplication_unit (MU): N x N signed array multiplier of a qCLIF neuron.
//
// Multiplies the rectified apical potential (operand a, never negative in
// the neuron) by the signed somatic input (operand b) and returns the 2N-bit
// product that the somatic compartment accumulates. It is written as an
// array multiplier: row i is the AND of a with bit i of b, shifted by i, and
// the rows are added one after another; the row of the sign bit of b is
// subtracted (two's-complement weight -2^(N-1)). Purely combinational.
//
// The N x N size, the array structure and the 2N-bit product follow the
// paper; the signed treatment of both operands is this design's choice.
module multiplication_unit
  import qclif_pkg::*;
#(
  parameter int unsigned N = N_BITS
) (
  input  logic signed [N-1:0]   a,
  input  logic signed [N-1:0]   b,
  output logic signed [2*N-1:0] p
);

  logic signed [2*N-1:0] row [N];
  logic signed [2*N-1:0] acc [N+1];

  always_comb begin
    acc[0] = '0;
    for (int unsigned i = 0; i < N; i++) begin
      row[i] = ((2*N)'(a) & {(2*N){b[i]}}) << i;
      if (i == N - 1) acc[i+1] = acc[i] - row[i];
      else            acc[i+1] = acc[i] + row[i];
    end
    p = acc[N];
  end

endmodule
