// process_engine: the compute engine of the accelerator.
//
// A dispatcher feeds the scan stream of the running operation to one of
// three compute blocks: pw_conv (1x1 convolution, 32x32 multipliers),
// dw_conv (3x3 depthwise convolution, 32x9 multipliers) and dw_deconv
// (3x3 stride-2 depthwise deconvolution, 32x9 multipliers).  Their sums
// pass through a common output stage:
//   * a pointwise pass that is not the last of its output group writes
//     its 32-bit partial sums to the high-precision buffer (wr_hp = 1);
//   * every other result gets bias (final operations), requantisation to
//     16 bits and LeakyReLU (act_en), and is written to the destination
//     low-precision feature-map buffer.
// The engine also computes the destination address of each result:
//   PW      address carried with the pixel from the controller;
//   DW      (y>>s)*(w>>s) + (x>>s) for window centre (y, x), s = stride2;
//   DECONV  (2y + a)*(2w) + 2x + b for output (a, b) of the 2x2 patch.
//
// Inputs in_* must be aligned with the feature-map data (the controller
// delays its scan signals by the buffer read latency).  'cfg' must be
// stable for the whole operation and 'start' pulsed before its first scan
// item.  Results are registered once more before the buffer write port.
//
// Provenance: the three compute blocks, the high-precision buffer fed
// back into the pointwise accumulator, bias and LeakyReLU follow the
// paper; where bias and requantisation are applied, and the address
// formulas, are this design's own.
module process_engine
  import depthnet_pkg::*;
#(
  parameter int unsigned NL     = 32,
  parameter int unsigned WMAX_W = 1216
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  desc_t                             cfg,
  input  logic                              start,
  input  logic                              in_valid,
  input  logic signed [NL-1:0][DW-1:0]      in_pix,
  input  logic signed [NL-1:0][ACCW-1:0]    in_init,
  input  logic [FM_AW-1:0]                  in_addr,
  input  logic signed [NL-1:0][NL-1:0][DW-1:0] pw_w,
  input  logic signed [NL-1:0][8:0][DW-1:0] dw_k,
  input  logic signed [NL-1:0][DW-1:0]      bias,
  output logic                              wr_valid,
  output logic                              wr_hp,
  output logic [FM_AW-1:0]                  wr_addr,
  output logic signed [NL-1:0][DW-1:0]      wr_lp,
  output logic signed [NL-1:0][ACCW-1:0]    wr_hpdata,
  output logic                              dc_busy
);
  localparam int unsigned TAGW = 2 * DIMW;

  logic                              pw_v, dw_v, dc_v, dc_rdy;
  logic signed [NL-1:0][DW-1:0]      pw_pix;
  logic signed [NL-1:0][ACCW-1:0]    pw_init;
  logic [FM_AW-1:0]                  pw_addr;
  logic signed [NL-1:0][8:0][DW-1:0] win;
  logic signed [NL-1:0][3:0][DW-1:0] patch;
  logic [DIMW-1:0]                   wy, wx;

  dispatcher #(.LANES(NL), .MAX_W(WMAX_W)) u_disp (
    .clk, .rst_n, .op(cfg.op), .stride2(cfg.stride2), .start, .w(cfg.w),
    .in_valid, .in_pix, .in_init, .in_addr,
    .pw_valid(pw_v), .pw_pix, .pw_init, .pw_addr,
    .dw_valid(dw_v), .dc_valid(dc_v), .win, .patch, .win_y(wy), .win_x(wx)
  );

  // ---- compute blocks ----------------------------------------------------
  logic                           pw_ov, dw_ov, dc_ov;
  logic signed [NL-1:0][ACCW-1:0] pw_acc, dw_sum, dc_sum;
  logic [TAGW-1:0]                pw_tag, dw_tag, dc_tag;
  logic [1:0]                     dc_sub;

  pw_conv #(.LANES(NL), .NIN(NL), .DW(DW), .ACCW(ACCW), .TAGW(TAGW)) u_pw (
    .clk, .rst_n, .in_valid(pw_v), .in_pix(pw_pix), .weights(pw_w),
    .acc_init(cfg.acc_in ? pw_init : '0), .in_tag(TAGW'(pw_addr)),
    .out_valid(pw_ov), .out_acc(pw_acc), .out_tag(pw_tag)
  );

  dw_conv #(.LANES(NL), .DW(DW), .ACCW(ACCW), .TAGW(TAGW)) u_dw (
    .clk, .rst_n, .in_valid(dw_v), .win, .kern(dw_k), .in_tag({wy, wx}),
    .out_valid(dw_ov), .out_sum(dw_sum), .out_tag(dw_tag)
  );

  dw_deconv #(.LANES(NL), .DW(DW), .ACCW(ACCW), .TAGW(TAGW)) u_dc (
    .clk, .rst_n, .in_valid(dc_v), .in_ready(dc_rdy), .patch, .kern(dw_k),
    .in_tag({wy, wx}), .out_valid(dc_ov), .out_sub(dc_sub), .out_sum(dc_sum),
    .out_tag(dc_tag)
  );

  assign dc_busy = !dc_rdy;

  // The controller spaces deconvolution patches 4 cycles apart.
  assert property (@(posedge clk) disable iff (!rst_n) dc_v |-> dc_rdy)
    else $error("dw_deconv patch arrived while busy");

  // ---- result select and address ----------------------------------------
  logic                           r_v, r_hp;
  logic signed [NL-1:0][ACCW-1:0] r_acc;
  logic [FM_AW-1:0]               r_addr;
  logic signed [NL-1:0][DW-1:0]   r_lp;
  logic [DIMW-1:0]                ty, tx, wo;

  always_comb begin
    r_v    = 1'b0;
    r_hp   = 1'b0;
    r_acc  = pw_acc;
    r_addr = '0;
    ty     = '0;
    tx     = '0;
    wo     = cfg.stride2 ? (cfg.w >> 1) : cfg.w;
    unique case (cfg.op)
      OP_PW: begin
        r_v    = pw_ov;
        r_hp   = !cfg.final_op;
        r_acc  = pw_acc;
        r_addr = FM_AW'(pw_tag);
      end
      OP_DW: begin
        {ty, tx} = dw_tag;
        r_v    = dw_ov;
        r_acc  = dw_sum;
        if (cfg.stride2) r_addr = FM_AW'((ty >> 1) * wo + (tx >> 1));
        else             r_addr = FM_AW'(ty * wo + tx);
      end
      OP_DECONV: begin
        {ty, tx} = dc_tag;
        r_v    = dc_ov;
        r_acc  = dc_sum;
        r_addr = FM_AW'(({ty, 1'b0} + dc_sub[1]) * {cfg.w, 1'b0} + {tx, 1'b0} + dc_sub[0]);
      end
      default: ;
    endcase
  end

  post_proc #(.NL(NL)) u_post (
    .bias_en(cfg.final_op), .act_en(cfg.act_en), .acc(r_acc), .bias, .y(r_lp)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_valid <= 1'b0;
    else        wr_valid <= r_v;
  end

  always_ff @(posedge clk) begin
    wr_hp     <= r_hp;
    wr_addr   <= r_addr;
    wr_lp     <= r_lp;
    wr_hpdata <= r_acc;
  end
endmodule
