// depthnet_pkg: shared sizes, fixed-point format and the operation
// descriptor of the DepthNet depthwise-separable CNN accelerator.
//
// Numbers that come from the accelerator description: 32 parallel lanes
// (channels) in every compute block, 3x3 depthwise kernels, feature-map
// buffers of 152x32 pixels x 32 channels, ten of them.  Everything else
// here (16-bit Q7.8 data, 32-bit partial sums, the descriptor layout) is
// this implementation's own choice.
package depthnet_pkg;

  // ---- datapath sizes -------------------------------------------------
  localparam int unsigned LANES    = 32;        // channels processed in parallel
  localparam int unsigned DW       = 16;        // feature / weight word width
  localparam int unsigned FRAC     = 8;         // fraction bits of DW words
  localparam int unsigned ACCW     = 32;        // partial sum width (pw high precision)
  localparam int unsigned KTAPS    = 9;         // 3x3 kernel
  localparam int unsigned PIXW     = LANES * DW;    // one low-precision pixel word (512)
  localparam int unsigned HPW      = LANES * ACCW;  // one high-precision pixel word (1024)

  // ---- buffers --------------------------------------------------------
  localparam int unsigned FM_H     = 32;
  localparam int unsigned FM_W     = 152;
  localparam int unsigned FM_DEPTH = FM_H * FM_W;   // 4864 pixel words
  localparam int unsigned N_FM     = 10;
  localparam int unsigned FM_AW    = 13;            // covers FM_DEPTH
  localparam int unsigned DIMW     = 11;            // row/column counters (up to 1216)
  localparam int unsigned MAX_W    = 1216;          // widest feature-map row

  localparam int unsigned PW_WDEPTH = 64;           // pw weight words per bank (32 banks)
  localparam int unsigned DW_WDEPTH = 32;           // dw kernel words per bank (9 banks)
  localparam int unsigned B_DEPTH   = 32;           // bias words (1 bank)
  localparam int unsigned WAW       = 6;            // weight-buffer word address

  localparam int unsigned AXI_AW   = 32;
  localparam int unsigned AXI_DW   = PIXW;          // one pixel word per beat
  localparam int unsigned LENW     = 13;            // transfer length in beats

  // ---- operations -----------------------------------------------------
  typedef enum logic [2:0] {
    OP_PW       = 3'd0,   // pointwise 1x1 convolution (stride 1 or 2)
    OP_DW       = 3'd1,   // depthwise 3x3 convolution (stride 1 or 2)
    OP_DECONV   = 3'd2,   // depthwise 3x3 stride-2 deconvolution
    OP_LOAD_FM  = 3'd3,   // DDR -> feature-map buffer
    OP_STORE_FM = 3'd4,   // feature-map buffer -> DDR
    OP_LOAD_W   = 3'd5    // DDR -> weight / kernel / bias buffer
  } op_e;

  typedef enum logic [1:0] {
    WSEL_PW   = 2'd0,
    WSEL_DW   = 2'd1,
    WSEL_BIAS = 2'd2
  } wsel_e;

  typedef struct packed {
    op_e               op;
    logic [3:0]        src;       // source FM buffer (compute, store)
    logic [3:0]        dst;       // destination FM buffer (compute, load)
    logic [DIMW-1:0]   h;         // input rows
    logic [DIMW-1:0]   w;         // input columns
    logic              stride2;   // PW / DW: stride 2
    logic              acc_in;    // PW: add the high-precision buffer to the sum
    logic              final_op;  // add bias, requantise and write the FM buffer
    logic              act_en;    // apply LeakyReLU on the final write
    logic [WAW-1:0]    waddr;     // weight / kernel word address
    logic [WAW-1:0]    baddr;     // bias word address
    wsel_e             wsel;      // OP_LOAD_W target
    logic [AXI_AW-1:0] ddr_addr;  // DMA byte address (64-byte aligned)
    logic [LENW-1:0]   len;       // DMA length in 512-bit words
    logic [FM_AW-1:0]  fm_off;    // DMA first buffer word
  } desc_t;

  // Saturate a wide signed value to DW bits.
  function automatic logic signed [DW-1:0] sat_dw(input logic signed [ACCW+DW-1:0] v);
    localparam logic signed [ACCW+DW-1:0] MAXV = (2 ** (DW - 1)) - 1;
    localparam logic signed [ACCW+DW-1:0] MINV = -(2 ** (DW - 1));
    if (v > MAXV)      return DW'(MAXV);
    else if (v < MINV) return DW'(MINV);
    else               return v[DW-1:0];
  endfunction

endpackage
