// dw_deconv: depthwise 3x3, stride-2 deconvolution unit without the
// multiplications by inserted zeros.
//
// The input map is padded with one zero row on top and one zero column on
// the left and scanned with a 2x2 window.  For a window
//     IF11 IF12
//     IF21 IF22
// the four outputs of the matching 2x2 output patch are
//     OF11 = IF11*K11 + IF12*K13 + IF21*K31 + IF22*K33
//     OF12 = IF12*K12 + IF22*K32
//     OF21 = IF21*K21 + IF22*K23
//     OF22 = IF22*K22
// i.e. exactly nine products, one per kernel tap.  All nine are formed in
// the cycle a patch is accepted (a 3x3 multiplier array per channel), and
// the four sums leave one per cycle in the order OF11, OF12, OF21, OF22.
//
// Ports: patch[c] = {IF22, IF21, IF12, IF11} (index 0 = IF11); kernel taps
// t = (ky-1)*3 + (kx-1) for K_ky,kx.  No kernel rotation is applied.
// Timing: a patch is accepted when in_valid && in_ready; its outputs
// appear 2, 3, 4 and 5 cycles later, out_sub = 0..3.  in_ready is high
// in the last output cycle, so patches can follow each other every 4
// cycles.  The kernel must stay stable while a patch is in flight (it
// changes only between layers).  The output order is this design's choice.
module dw_deconv #(
  parameter int unsigned LANES = 32,
  parameter int unsigned DW    = 16,
  parameter int unsigned ACCW  = 32,
  parameter int unsigned TAGW  = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  output logic                              in_ready,
  input  logic signed [LANES-1:0][3:0][DW-1:0] patch,
  input  logic signed [LANES-1:0][8:0][DW-1:0] kern,
  input  logic [TAGW-1:0]                   in_tag,
  output logic                              out_valid,
  output logic [1:0]                        out_sub,
  output logic signed [LANES-1:0][ACCW-1:0] out_sum,
  output logic [TAGW-1:0]                   out_tag
);
  localparam int unsigned PW = 2 * DW;
  // kernel tap indices
  localparam int K11 = 0, K12 = 1, K13 = 2, K21 = 3, K22 = 4, K23 = 5,
                 K31 = 6, K32 = 7, K33 = 8;
  localparam int IF11 = 0, IF12 = 1, IF21 = 2, IF22 = 3;

  logic signed [LANES-1:0][8:0][PW-1:0] prod_q;
  logic [TAGW-1:0] tag_q;
  logic            active;
  logic [1:0]      cnt;
  logic            accept;

  assign in_ready = !active || (cnt == 2'd3);
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (accept) begin
      for (int c = 0; c < LANES; c++) begin
        prod_q[c][0] <= $signed(patch[c][IF11]) * $signed(kern[c][K11]);
        prod_q[c][1] <= $signed(patch[c][IF12]) * $signed(kern[c][K13]);
        prod_q[c][2] <= $signed(patch[c][IF21]) * $signed(kern[c][K31]);
        prod_q[c][3] <= $signed(patch[c][IF22]) * $signed(kern[c][K33]);
        prod_q[c][4] <= $signed(patch[c][IF12]) * $signed(kern[c][K12]);
        prod_q[c][5] <= $signed(patch[c][IF22]) * $signed(kern[c][K32]);
        prod_q[c][6] <= $signed(patch[c][IF21]) * $signed(kern[c][K21]);
        prod_q[c][7] <= $signed(patch[c][IF22]) * $signed(kern[c][K23]);
        prod_q[c][8] <= $signed(patch[c][IF22]) * $signed(kern[c][K22]);
      end
      tag_q <= in_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      cnt    <= '0;
    end else if (accept) begin
      active <= 1'b1;
      cnt    <= '0;
    end else if (active) begin
      cnt <= cnt + 2'd1;
      if (cnt == 2'd3) active <= 1'b0;
    end
  end

  // one output per cycle while active
  always_ff @(posedge clk) begin
    for (int c = 0; c < LANES; c++) begin
      unique case (cnt)
        2'd0: out_sum[c] <= ACCW'($signed(prod_q[c][0])) + ACCW'($signed(prod_q[c][1]))
                          + ACCW'($signed(prod_q[c][2])) + ACCW'($signed(prod_q[c][3]));
        2'd1: out_sum[c] <= ACCW'($signed(prod_q[c][4])) + ACCW'($signed(prod_q[c][5]));
        2'd2: out_sum[c] <= ACCW'($signed(prod_q[c][6])) + ACCW'($signed(prod_q[c][7]));
        default: out_sum[c] <= ACCW'($signed(prod_q[c][8]));
      endcase
    end
    out_sub <= cnt;
    out_tag <= tag_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= active;
  end
endmodule
