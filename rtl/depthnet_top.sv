// depthnet_top: CNN inference accelerator for the DepthNet depthwise-
// separable depth-completion network.
//
// The host (the processor running the LiDAR driver and the distance
// transform) places a raw depth map and the network parameters in DDR and
// sends a list of operation descriptors.  The accelerator contains
//   * layer_ctrl      - runs the descriptors one by one;
//   * axi_dma         - AXI4 master to DDR for feature maps and parameters;
//   * N_FM fm_buffers - low-precision (16-bit) feature-map buffers, each one
//                       152x32-pixel tile of one 32-channel group;
//   * 1 fm_buffer     - high-precision (32-bit) buffer for pointwise partial
//                       sums;
//   * weight_buffer x3 - pointwise weights (32 banks), depthwise kernels
//                       (9 banks) and biases (1 bank);
//   * process_engine  - dispatcher, pw_conv, dw_conv, dw_deconv, bias,
//                       requantisation and LeakyReLU.
// A network layer is a sequence of descriptors: a depthwise pass (3x3
// convolution or deconvolution) from one buffer into another, then one
// pointwise pass per (input group, output group) pair, the passes of one
// output group accumulating in the high-precision buffer and the last one
// adding bias and activation.  Shortcut additions and channel
// concatenations are further pointwise passes into the same accumulation.
// Feature maps larger than a buffer are processed tile by tile through DDR.
//
// Ports: a valid/ready descriptor port, status (busy, ops_done, dma_err)
// and a full AXI4 master (512-bit data) for the processor's HP port.
//
// Provenance: the parts (three compute blocks sharing one dispatcher, ten
// feature-map buffers of 152x32x32, one high-precision buffer, weight and
// bias buffers, an AXI4 master towards DDR) follow the paper's block
// diagrams.  The descriptor port, the buffer multiplexing by descriptor
// fields and the DMA bank mapping are this design's own choices.
module depthnet_top
  import depthnet_pkg::*;
#(
  parameter int unsigned NFM      = N_FM,
  parameter int unsigned FMDEPTH  = FM_DEPTH,
  parameter int unsigned LINE_W   = MAX_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 desc_valid,
  output logic                 desc_ready,
  input  desc_t                desc,
  output logic                 busy,
  output logic [31:0]          ops_done,
  output logic                 dma_err,
  // AXI4 master
  output logic [AXI_AW-1:0]    m_axi_araddr,
  output logic [7:0]           m_axi_arlen,
  output logic [2:0]           m_axi_arsize,
  output logic [1:0]           m_axi_arburst,
  output logic                 m_axi_arvalid,
  input  logic                 m_axi_arready,
  input  logic [AXI_DW-1:0]    m_axi_rdata,
  input  logic [1:0]           m_axi_rresp,
  input  logic                 m_axi_rlast,
  input  logic                 m_axi_rvalid,
  output logic                 m_axi_rready,
  output logic [AXI_AW-1:0]    m_axi_awaddr,
  output logic [7:0]           m_axi_awlen,
  output logic [2:0]           m_axi_awsize,
  output logic [1:0]           m_axi_awburst,
  output logic                 m_axi_awvalid,
  input  logic                 m_axi_awready,
  output logic [AXI_DW-1:0]    m_axi_wdata,
  output logic [AXI_DW/8-1:0]  m_axi_wstrb,
  output logic                 m_axi_wlast,
  output logic                 m_axi_wvalid,
  input  logic                 m_axi_wready,
  input  logic [1:0]           m_axi_bresp,
  input  logic                 m_axi_bvalid,
  output logic                 m_axi_bready
);
  desc_t cfg;

  // ---- controller ----------------------------------------------------------
  logic             pe_start, fm_rd_en, hp_rd_en, pe_valid, pe_pad;
  logic [FM_AW-1:0] fm_rd_addr, hp_rd_addr, pe_addr;
  logic             dma_start, dma_done, dma_busy;

  layer_ctrl u_ctrl (
    .clk, .rst_n, .desc_valid, .desc_ready, .desc, .cfg, .busy, .ops_done,
    .pe_start, .fm_rd_en, .fm_rd_addr, .hp_rd_en, .hp_rd_addr,
    .pe_valid, .pe_pad, .pe_addr, .dma_start, .dma_done
  );

  // ---- DMA -----------------------------------------------------------------
  logic              dma_wr_en, dma_rd_en;
  logic [LENW-1:0]   dma_idx;
  logic [PIXW-1:0]   dma_wr_data, dma_rd_data;

  axi_dma #(.AW(AXI_AW), .DATAW(AXI_DW), .LENW(LENW), .MAX_BURST(16)) u_dma (
    .clk, .rst_n,
    .start(dma_start), .dir(cfg.op == OP_STORE_FM), .ddr_addr(cfg.ddr_addr), .len(cfg.len),
    .busy(dma_busy), .done(dma_done), .err(dma_err),
    .buf_wr_en(dma_wr_en), .buf_rd_en(dma_rd_en), .buf_idx(dma_idx),
    .buf_wr_data(dma_wr_data), .buf_rd_data(dma_rd_data),
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready,
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst, .m_axi_awvalid, .m_axi_awready,
    .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid, .m_axi_wready,
    .m_axi_bresp, .m_axi_bvalid, .m_axi_bready
  );

  // ---- process engine ------------------------------------------------------
  logic                              wr_valid, wr_hp, dc_busy;
  logic [FM_AW-1:0]                  wr_addr;
  logic signed [LANES-1:0][DW-1:0]   wr_lp;
  logic signed [LANES-1:0][ACCW-1:0] wr_hpdata;
  logic [PIXW-1:0]                   src_data;
  logic [HPW-1:0]                    hp_rd_data;
  logic [LANES-1:0][PIXW-1:0]        pw_words;
  logic [8:0][PIXW-1:0]              dw_words;
  logic [0:0][PIXW-1:0]              b_words;
  logic signed [LANES-1:0][LANES-1:0][DW-1:0] pw_w;
  logic signed [LANES-1:0][8:0][DW-1:0]       dw_k;

  // bank t of the kernel buffer holds tap t of all channels
  always_comb begin
    for (int o = 0; o < LANES; o++) pw_w[o] = pw_words[o];
    for (int c = 0; c < LANES; c++)
      for (int t = 0; t < 9; t++)
        dw_k[c][t] = dw_words[t][c*DW +: DW];
  end

  process_engine #(.NL(LANES), .WMAX_W(LINE_W)) u_pe (
    .clk, .rst_n, .cfg, .start(pe_start),
    .in_valid(pe_valid),
    .in_pix(pe_pad ? '0 : src_data),
    .in_init(hp_rd_data),
    .in_addr(pe_addr),
    .pw_w, .dw_k, .bias(b_words[0]),
    .wr_valid, .wr_hp, .wr_addr, .wr_lp, .wr_hpdata, .dc_busy
  );

  // ---- feature-map buffers ---------------------------------------------------
  logic [PIXW-1:0] fm_q [NFM];

  for (genvar b = 0; b < NFM; b++) begin : g_fm
    logic             re, we;
    logic [FM_AW-1:0] ra, wa;
    logic [PIXW-1:0]  wd;
    always_comb begin
      re = (cfg.src == 4'(b)) && (fm_rd_en || (dma_rd_en && cfg.op == OP_STORE_FM));
      ra = fm_rd_en ? fm_rd_addr : (cfg.fm_off + FM_AW'(dma_idx));
      we = 1'b0;
      wa = wr_addr;
      wd = wr_lp;
      if (cfg.dst == 4'(b)) begin
        if (wr_valid && !wr_hp) begin
          we = 1'b1;
        end else if (dma_wr_en && cfg.op == OP_LOAD_FM) begin
          we = 1'b1;
          wa = cfg.fm_off + FM_AW'(dma_idx);
          wd = dma_wr_data;
        end
      end
    end
    fm_buffer #(.DEPTH(FMDEPTH), .WIDTH(PIXW), .AW(FM_AW)) u_buf (
      .clk, .rd_en(re), .rd_addr(ra), .rd_data(fm_q[b]),
      .wr_en(we), .wr_addr(wa), .wr_data(wd)
    );
  end

  assign src_data    = (int'(cfg.src) < NFM) ? fm_q[cfg.src] : '0;
  assign dma_rd_data = src_data;

  fm_buffer #(.DEPTH(FMDEPTH), .WIDTH(HPW), .AW(FM_AW)) u_hp_buf (
    .clk, .rd_en(hp_rd_en), .rd_addr(hp_rd_addr), .rd_data(hp_rd_data),
    .wr_en(wr_valid && wr_hp), .wr_addr(wr_addr), .wr_data(wr_hpdata)
  );

  // ---- parameter buffers -----------------------------------------------------
  logic        ld_w;
  logic [4:0]  pw_bank;
  logic [3:0]  dw_bank;
  logic [WAW-1:0] pw_wa, dw_wa, b_wa;

  always_comb begin
    ld_w    = dma_wr_en && (cfg.op == OP_LOAD_W);
    pw_bank = 5'(dma_idx % LANES);
    dw_bank = 4'(dma_idx % 9);
    pw_wa   = cfg.waddr + WAW'(dma_idx / LANES);
    dw_wa   = cfg.waddr + WAW'(dma_idx / 9);
    b_wa    = cfg.baddr + WAW'(dma_idx);
  end

  weight_buffer #(.NBANK(LANES), .DEPTH(PW_WDEPTH), .WIDTH(PIXW), .AW(WAW), .BW(5)) u_pw_wbuf (
    .clk, .wr_en(ld_w && cfg.wsel == WSEL_PW), .wr_bank(pw_bank), .wr_addr(pw_wa),
    .wr_data(dma_wr_data), .rd_addr(cfg.waddr), .rd_data(pw_words)
  );

  weight_buffer #(.NBANK(9), .DEPTH(DW_WDEPTH), .WIDTH(PIXW), .AW(WAW - 1), .BW(4)) u_dw_wbuf (
    .clk, .wr_en(ld_w && cfg.wsel == WSEL_DW), .wr_bank(dw_bank), .wr_addr(dw_wa[WAW-2:0]),
    .wr_data(dma_wr_data), .rd_addr(cfg.waddr[WAW-2:0]), .rd_data(dw_words)
  );

  weight_buffer #(.NBANK(1), .DEPTH(B_DEPTH), .WIDTH(PIXW), .AW(WAW - 1), .BW(1)) u_b_buf (
    .clk, .wr_en(ld_w && cfg.wsel == WSEL_BIAS), .wr_bank(1'b0), .wr_addr(b_wa[WAW-2:0]),
    .wr_data(dma_wr_data), .rd_addr(cfg.baddr[WAW-2:0]), .rd_data(b_words)
  );

  // a compute pass and a DMA transfer never overlap
  assert property (@(posedge clk) disable iff (!rst_n) !(dma_busy && pe_valid))
    else $error("DMA and compute overlap");
endmodule
