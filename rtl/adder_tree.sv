// adder_tree: combinational balanced adder tree summing N signed inputs.
// The inputs are sign-extended to OW bits and placed, padded with zeros
// to the next power of two P, at the leaves of a binary heap of 2P-1
// nodes; every inner node i is the sum of nodes 2i+1 and 2i+2, and node 0
// is the result.  The depth is ceil(log2 N) adders (adders fed by padding
// zeros are removed by synthesis).  Choose OW >= IW + ceil(log2 N) to
// avoid overflow.
//
// Interface: 'in' is N packed IW-bit signed operands, 'sum' the OW-bit
// signed total, with no clock (the instantiating block registers it).
//
// Provenance: the paper only shows an adder tree after each multiplier
// array; this heap-ordered, purely combinational form is this design's own.
module adder_tree #(
  parameter int unsigned N  = 32,
  parameter int unsigned IW = 32,
  parameter int unsigned OW = IW + $clog2(N)
) (
  input  logic signed [N-1:0][IW-1:0] in,
  output logic signed [OW-1:0]        sum
);
  localparam int unsigned P = 1 << $clog2(N);

  logic signed [OW-1:0] node [2*P-1];

  for (genvar i = 0; i < P; i++) begin : g_leaf
    if (i < N) begin : g_in
      assign node[P-1+i] = OW'($signed(in[i]));
    end else begin : g_pad
      assign node[P-1+i] = '0;
    end
  end

  for (genvar i = 0; i < P - 1; i++) begin : g_node
    assign node[i] = node[2*i+1] + node[2*i+2];
  end

  assign sum = node[0];
endmodule
