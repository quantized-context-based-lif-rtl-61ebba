// qclif_pkg: constants and helpers shared by the qCLIF recurrent spiking layer.
//
// The default sizes describe the layer evaluated as the main configuration:
// 200 neurons, 8-bit precision (N = M = 8), 10 context inputs, and 200
// external somatic inputs, which with 200 recurrent inputs gives
// 200 x (200 + 200 + 10) = 82,000 synapses, the synapse count reported for
// the 200-neuron layer. The number of external inputs is this design's
// reading of that count (the DVS gesture input stream itself is 512 wide).
// clog3() gives the number of 3:1 reduction stages of a spike weighting
// adder tree, the "log3" pipeline depth of the spike weighting module.
package qclif_pkg;

  localparam int unsigned N_BITS      = 8;    // neuron data precision N
  localparam int unsigned M_BITS      = 8;    // synaptic weight precision M
  localparam int unsigned NUM_NEURONS = 200;  // neurons in the layer
  localparam int unsigned NUM_SOM_IN  = 200;  // external somatic (stimulus) inputs
  localparam int unsigned NUM_CTX_IN  = 10;   // context inputs, one per gesture class

  // ceil(log3(k)), at least 1: stages of a 3:1 adder tree over k operands
  function automatic int unsigned clog3(input int unsigned k);
    int unsigned s, span;
    s = 1;
    span = 3;
    while (span < k) begin
      span = span * 3;
      s = s + 1;
    end
    return s;
  endfunction

  // ceil(log2(k)), at least 1
  function automatic int unsigned clog2p(input int unsigned k);
    return (k <= 2) ? 1 : $clog2(k);
  endfunction

endpackage
