// apical_compartment (AC): the context-integrating compartment of a qCLIF neuron.
//
// Implements V_ap(t+1) = max(0, V_ap(t) - apical_leak + apical_input): the
// Leakage Subtractor (LS) removes a constant leak from the stored potential,
// the Apical Accumulator (AA) adds the weighted context input from the apical
// SWM, and the N-bit register keeps the result for the next cycle. When the
// sum is negative (its sign bit set) the register takes zero, so the stored
// value is always >= 0 and equals ReLU of the new potential.
//
// Follows the paper: the LS -> AA -> register chain, linear leak, the floor at
// zero, the N-bit widths. This design's choices: the arithmetic is done two
// bits wider and the result saturates at the largest positive N-bit signed
// value instead of wrapping; the leak is unsigned; reset is synchronous and
// clears the potential.
//
// Ports: ap_in (N-bit signed, from the SWM), ap_leak (N-bit unsigned),
// v_ap_next (AA output, combinational, the new potential passed on to the
// multiplication unit in the same cycle), v_ap (registered potential).
module apical_compartment
  import qclif_pkg::*;
#(
  parameter int unsigned N = N_BITS
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [N-1:0] ap_in,
  input  logic        [N-1:0] ap_leak,
  output logic        [N-1:0] v_ap_next,
  output logic        [N-1:0] v_ap
);

  localparam logic signed [N+1:0] VMAX = (N+2)'((longint'(1) << (N - 1)) - 1);

  logic signed [N+1:0] ls_out;   // leakage subtractor
  logic signed [N+1:0] aa_out;   // apical accumulator

  always_comb begin
    ls_out = signed'({2'b00, v_ap}) - signed'({2'b00, ap_leak});
    aa_out = ls_out + (N+2)'(ap_in);
    if (aa_out[N+1])        v_ap_next = '0;          // sign bit: negative -> 0
    else if (aa_out > VMAX) v_ap_next = VMAX[N-1:0];
    else                    v_ap_next = aa_out[N-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) v_ap <= '0;
    else     v_ap <= v_ap_next;
  end

endmodule
