// dispatcher: routes the scan stream read from a feature-map buffer to the
// compute block of the current operation.
//
//  * OP_PW     : the pixel (with its partial sum and address tag) goes
//                straight to pw_conv.
//  * OP_DW     : pixels go through the 3x3 window generator; every window
//                goes to dw_conv, or, for stride 2, only the windows centred
//                on an even row and even column.
//  * OP_DECONV : pixels go through the same window generator; the top-left
//                2x2 of the window centred on input pixel (r, c), which is
//                the 2x2 patch of the top/left padded map, goes to
//                dw_deconv.
// The window centre (y, x) is passed on as the tag for the depthwise
// blocks.  Timing: pw outputs are combinational; windows leave one cycle
// after the scan item that completes them.
//
// Provenance: the paper says the dispatcher routes feature-map data to
// the compute blocks and that deconvolution takes a 2x2 patch instead of
// a 3x3 window; the line-buffer window generator and the patch taps used
// are this design's own.
module dispatcher
  import depthnet_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned MAX_W = 1216
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  op_e                               op,
  input  logic                              stride2,
  input  logic                              start,
  input  logic [DIMW-1:0]                   w,
  input  logic                              in_valid,
  input  logic signed [LANES-1:0][DW-1:0]   in_pix,
  input  logic signed [LANES-1:0][ACCW-1:0] in_init,
  input  logic [FM_AW-1:0]                  in_addr,
  // pointwise branch
  output logic                              pw_valid,
  output logic signed [LANES-1:0][DW-1:0]   pw_pix,
  output logic signed [LANES-1:0][ACCW-1:0] pw_init,
  output logic [FM_AW-1:0]                  pw_addr,
  // depthwise branches
  output logic                              dw_valid,
  output logic                              dc_valid,
  output logic signed [LANES-1:0][8:0][DW-1:0] win,
  output logic signed [LANES-1:0][3:0][DW-1:0] patch,
  output logic [DIMW-1:0]                   win_y,
  output logic [DIMW-1:0]                   win_x
);
  logic wg_valid;

  assign pw_valid = in_valid && (op == OP_PW);
  assign pw_pix   = in_pix;
  assign pw_init  = in_init;
  assign pw_addr  = in_addr;

  window_gen #(.LANES(LANES), .DW(DW), .DIMW(DIMW), .MAX_W(MAX_W)) u_wg (
    .clk, .rst_n, .start, .w,
    .in_valid (in_valid && (op == OP_DW || op == OP_DECONV)),
    .in_pix,
    .out_valid(wg_valid),
    .out_y    (win_y),
    .out_x    (win_x),
    .win
  );

  assign dw_valid = wg_valid && (op == OP_DW) &&
                    (!stride2 || (!win_y[0] && !win_x[0]));
  assign dc_valid = wg_valid && (op == OP_DECONV);

  always_comb begin
    for (int c = 0; c < LANES; c++) begin
      patch[c][0] = win[c][0];   // IF11
      patch[c][1] = win[c][1];   // IF12
      patch[c][2] = win[c][3];   // IF21
      patch[c][3] = win[c][4];   // IF22 (the centre pixel)
    end
  end
endmodule
