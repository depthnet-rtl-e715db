// pw_conv: pointwise (1x1) convolution unit of the process engine.
//
// LANES output channels are computed in parallel for one input pixel.  Each
// output lane is a NIN x 1 multiplier array, a sum-NIN adder tree and an
// accumulator:  out_acc[o] = acc_init[o] + sum_i in_pix[i] * weights[o][i].
// With NIN = 32 this covers one 32-channel group of the input (loop 1 of
// the pointwise loop nest unrolled by 32).  Layers with more input
// channels are handled by running one pass per input group and feeding the
// partial sums back through acc_init from the high-precision buffer, which
// is the feedback path of the two-level buffer arrangement.
//
// Timing: fully pipelined, one pixel per cycle, latency 3 cycles
// (product registers, adder-tree register, accumulator register).  The
// tag travels with the pixel.  The accumulator and tree are ACCW bits,
// wider than the DW-bit data (the paper asks for higher-precision adders
// here); the exact widths are this design's choice.
module pw_conv #(
  parameter int unsigned LANES = 32,
  parameter int unsigned NIN   = 32,
  parameter int unsigned DW    = 16,
  parameter int unsigned ACCW  = 32,
  parameter int unsigned TAGW  = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic signed [NIN-1:0][DW-1:0]       in_pix,
  input  logic signed [LANES-1:0][NIN-1:0][DW-1:0] weights,
  input  logic signed [LANES-1:0][ACCW-1:0]   acc_init,
  input  logic [TAGW-1:0]                     in_tag,
  output logic                                out_valid,
  output logic signed [LANES-1:0][ACCW-1:0]   out_acc,
  output logic [TAGW-1:0]                     out_tag
);
  localparam int unsigned PW = 2 * DW;

  logic signed [LANES-1:0][NIN-1:0][PW-1:0] prod_q;
  logic signed [LANES-1:0][ACCW-1:0]        init_q1, init_q2;
  logic signed [LANES-1:0][ACCW-1:0]        tree_d, tree_q;
  logic [2:0]                               vld;
  logic [TAGW-1:0]                          tag_q1, tag_q2, tag_q3;

  // stage 1: multipliers
  always_ff @(posedge clk) begin
    for (int o = 0; o < LANES; o++)
      for (int i = 0; i < NIN; i++)
        prod_q[o][i] <= $signed(in_pix[i]) * $signed(weights[o][i]);
    init_q1 <= acc_init;
    tag_q1  <= in_tag;
  end

  // stage 2: sum-NIN adder trees
  for (genvar o = 0; o < LANES; o++) begin : g_tree
    adder_tree #(.N(NIN), .IW(PW), .OW(ACCW)) u_tree (.in(prod_q[o]), .sum(tree_d[o]));
  end

  always_ff @(posedge clk) begin
    tree_q  <= tree_d;
    init_q2 <= init_q1;
    tag_q2  <= tag_q1;
  end

  // stage 3: accumulators
  always_ff @(posedge clk) begin
    for (int o = 0; o < LANES; o++)
      out_acc[o] <= $signed(init_q2[o]) + $signed(tree_q[o]);
    tag_q3 <= tag_q2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], in_valid};
  end

  assign out_valid = vld[2];
  assign out_tag   = tag_q3;
endmodule
