// dw_conv: depthwise 3x3 convolution unit of the process engine.
//
// LANES channels are processed in parallel; each channel owns a 3x3
// multiplier array and a sum-9 adder tree, so one complete 3x3 window of
// every channel is consumed per cycle (loop 1 of the depthwise loop nest
// fully unrolled, loop 3 unrolled by LANES).  Window and kernel taps are
// ordered t = ky*3 + kx (row-major, tap 0 top-left).
//
// Timing: one window per cycle, latency 2 (product registers, then the
// adder-tree register).  Stride is not handled here: the process engine
// drops the windows a stride-2 layer does not need.
//
// Provenance: 32 channels x 9 multipliers and the adder tree follow the
// paper (loop 1 fully unrolled, loop 3 unrolled by 32); the 16-bit data,
// 32-bit sums and the 2-stage pipeline are this design's own choices.
module dw_conv #(
  parameter int unsigned LANES = 32,
  parameter int unsigned DW    = 16,
  parameter int unsigned ACCW  = 32,
  parameter int unsigned TAGW  = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic signed [LANES-1:0][8:0][DW-1:0] win,
  input  logic signed [LANES-1:0][8:0][DW-1:0] kern,
  input  logic [TAGW-1:0]                   in_tag,
  output logic                              out_valid,
  output logic signed [LANES-1:0][ACCW-1:0] out_sum,
  output logic [TAGW-1:0]                   out_tag
);
  localparam int unsigned PW = 2 * DW;

  logic signed [LANES-1:0][8:0][PW-1:0] prod_q;
  logic signed [LANES-1:0][ACCW-1:0]    sum_d;
  logic [1:0]                           vld;
  logic [TAGW-1:0]                      tag_q;

  always_ff @(posedge clk) begin
    for (int c = 0; c < LANES; c++)
      for (int t = 0; t < 9; t++)
        prod_q[c][t] <= $signed(win[c][t]) * $signed(kern[c][t]);
    tag_q <= in_tag;
  end

  for (genvar c = 0; c < LANES; c++) begin : g_tree
    adder_tree #(.N(9), .IW(PW), .OW(ACCW)) u_tree (.in(prod_q[c]), .sum(sum_d[c]));
  end

  always_ff @(posedge clk) begin
    out_sum <= sum_d;
    out_tag <= tag_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[0], in_valid};
  end

  assign out_valid = vld[1];
endmodule
