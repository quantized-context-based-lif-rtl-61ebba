// csa_adder_tree: pipelined 3:1 adder tree used by the spike weighting module.
//
// Sums K signed operands. Every stage takes the operands three at a time,
// compresses each triple with a carry-save (3:2) compressor, resolves the
// sum/carry pair with one carry-propagate adder, and registers the result.
// K operands therefore need clog3(K) stages, and the sum appears LATENCY =
// clog3(K) clock cycles after the operands are presented. The tree accepts a
// new operand set every cycle. The paper names carry-save adders and a log3
// pipeline; the grouping, the register after every stage and the synchronous
// reset of the pipeline to zero are this design's choices.
//
// Ports: clk, rst (synchronous, active high, clears the pipeline),
// in_ops[K] (W-bit signed operands), sum (OW-bit signed, full precision).
module csa_adder_tree
  import qclif_pkg::*;
#(
  parameter int unsigned K  = 9,
  parameter int unsigned W  = 8,
  parameter int unsigned OW = W + clog2p(K) + 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [W-1:0]  in_ops [K],
  output logic signed [OW-1:0] sum
);

  localparam int unsigned STAGES = clog3(K);

  // number of live operands entering stage s (s = 0 .. STAGES)
  function automatic int unsigned live(input int unsigned s);
    int unsigned n;
    n = K;
    for (int unsigned i = 0; i < s; i++) n = (n + 2) / 3;
    return n;
  endfunction

  // carry-save compression of three operands followed by a carry-propagate add
  function automatic logic signed [OW-1:0] csa_add3(input logic signed [OW-1:0] a,
                                                    input logic signed [OW-1:0] b,
                                                    input logic signed [OW-1:0] c);
    logic [OW-1:0] s_vec, c_vec;
    s_vec = a ^ b ^ c;
    c_vec = ((a & b) | (a & c) | (b & c)) << 1;
    return signed'(s_vec + c_vec);
  endfunction

  logic signed [OW-1:0] lvl [STAGES+1][K];

  always_comb begin
    for (int unsigned i = 0; i < K; i++) lvl[0][i] = OW'(in_ops[i]);
  end

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    localparam int unsigned NIN  = live(s);
    localparam int unsigned NOUT = live(s + 1);
    always_ff @(posedge clk) begin
      for (int unsigned j = 0; j < K; j++) begin
        if (rst || j >= NOUT) begin
          lvl[s+1][j] <= '0;
        end else begin
          lvl[s+1][j] <= csa_add3(lvl[s][3*j],
                                  (3*j + 1 < NIN) ? lvl[s][3*j+1] : '0,
                                  (3*j + 2 < NIN) ? lvl[s][3*j+2] : '0);
        end
      end
    end
  end

  assign sum = lvl[STAGES][0];

endmodule
