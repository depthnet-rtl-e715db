// depthnet_top_tb: end-to-end test of the accelerator at its default
// sizes, with a behavioural AXI memory (random backpressure) as DDR.
//
// One full 152 x 32 x 32 tile (a whole feature-map buffer) goes through a
// small depthwise-separable layer sequence:
//   load tile, kernels, biases, pointwise weights from DDR
//   DW 3x3 s1 + bias + LeakyReLU        buf0 (32x152) -> buf1 (32x152)
//   DW 3x3 s2 + bias                    buf1          -> buf2 (16x76)
//   PW s1, partial sums to HP buffer    buf2          -> HP
//   PW s2, accumulate HP + bias + act   buf1 (s2)     -> buf3 (16x76)
//   DECONV 3x3 s2 + bias + LeakyReLU    buf3          -> buf4 (32x152)
//   store buf2 and buf4 to DDR
// Every stored pixel is compared with depthnet_ref_pkg.  The test also
// checks the one-window-per-cycle rate of the depthwise pass and the
// one-patch-per-4-cycles rate of the deconvolution, and counts each
// mechanism (stride-2 windows, high-precision writes and reads, 4-output
// deconvolution, negative LeakyReLU inputs, zero-pad items, AXI stalls and
// 4 KB burst splits); one that never happens is a failure.
//
// Provenance: the layer types and the 152x32x32 tile are the paper's; the
// layer sequence is a test of this design's own choosing.
module depthnet_top_tb;
  import depthnet_pkg::*;
  import depthnet_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic desc_valid, desc_ready, busy, dma_err;
  desc_t desc;
  logic [31:0] ops_done;
  logic [AXI_AW-1:0] m_axi_araddr, m_axi_awaddr;
  logic [7:0] m_axi_arlen, m_axi_awlen;
  logic [2:0] m_axi_arsize, m_axi_awsize;
  logic [1:0] m_axi_arburst, m_axi_awburst, m_axi_rresp, m_axi_bresp;
  logic m_axi_arvalid, m_axi_arready, m_axi_rlast, m_axi_rvalid, m_axi_rready;
  logic m_axi_awvalid, m_axi_awready, m_axi_wlast, m_axi_wvalid, m_axi_wready;
  logic m_axi_bvalid, m_axi_bready;
  logic [AXI_DW-1:0] m_axi_rdata, m_axi_wdata;
  logic [AXI_DW/8-1:0] m_axi_wstrb;

  depthnet_top dut (.*);

  axi_mem_model #(.AW(AXI_AW), .DATAW(AXI_DW)) u_ddr (
    .clk, .rst_n,
    .araddr(m_axi_araddr), .arlen(m_axi_arlen), .arvalid(m_axi_arvalid), .arready(m_axi_arready),
    .rdata(m_axi_rdata), .rresp(m_axi_rresp), .rlast(m_axi_rlast), .rvalid(m_axi_rvalid), .rready(m_axi_rready),
    .awaddr(m_axi_awaddr), .awlen(m_axi_awlen), .awvalid(m_axi_awvalid), .awready(m_axi_awready),
    .wdata(m_axi_wdata), .wlast(m_axi_wlast), .wvalid(m_axi_wvalid), .wready(m_axi_wready),
    .bresp(m_axi_bresp), .bvalid(m_axi_bvalid), .bready(m_axi_bready)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters --------------------------------------------------
  int n_s2win = 0, n_hpwr = 0, n_hprd = 0, n_dcout = 0, n_neg = 0, n_pad = 0, n_split = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_pe.dw_v && dut.cfg.stride2) n_s2win++;
    if (dut.u_pe.wr_valid && dut.u_pe.wr_hp) n_hpwr++;
    if (dut.u_ctrl.hp_rd_en) n_hprd++;
    if (dut.u_pe.dc_ov) n_dcout++;
    if (dut.u_pe.r_v && dut.cfg.act_en)
      for (int l = 0; l < L; l++) if (dut.u_pe.u_post.q[l][DW-1]) n_neg++;
    if (dut.u_ctrl.pe_valid && dut.u_ctrl.pe_pad) n_pad++;
    if (m_axi_arvalid && m_axi_arready && m_axi_arlen != 8'd15 &&
        ((m_axi_araddr + (32'(m_axi_arlen) + 1) * 64) % 4096 == 0)) n_split++;
  end

  // ---- DDR helpers ----------------------------------------------------------
  function automatic logic [AXI_DW-1:0] pack(int v [L]);
    logic [AXI_DW-1:0] w;
    for (int c = 0; c < L; c++) w[c*DW +: DW] = DW'(v[c]);
    return w;
  endfunction

  fmap_t cm;   // map being compared
  task automatic cmp_fm(string name, longint base, int n);
    int bad;
    bad = 0;
    for (int p = 0; p < n; p++) begin
      logic [AXI_DW-1:0] w;
      w = u_ddr.peek(base + p);
      for (int c = 0; c < L; c++) begin
        checks++;
        if (int'($signed(w[c*DW +: DW])) != cm[c][p]) begin
          failures++; bad++;
          if (bad < 5) $display("%s pixel %0d ch %0d: got %0d exp %0d", name, p, c,
                                int'($signed(w[c*DW +: DW])), cm[c][p]);
        end
      end
    end
    $display("%s: %0d pixels compared, %0d mismatches", name, n, bad);
  endtask

  int nops = 0;
  task automatic send(desc_t d);
    @(negedge clk);
    while (!desc_ready) @(negedge clk);
    desc = d; desc_valid = 1;
    @(negedge clk);
    desc_valid = 0;
    nops++;
    while (ops_done != 32'(nops)) @(negedge clk);
  endtask

  function automatic desc_t mk(op_e op, int src, int dst, int h, int w);
    desc_t d;
    d = '0;
    d.op = op; d.src = 4'(src); d.dst = 4'(dst); d.h = DIMW'(h); d.w = DIMW'(w);
    return d;
  endfunction

  // ---- data -----------------------------------------------------------------
  fmap_t x0, r1, r2, r3, r4;
  accmap_t zero_acc, acc_a, acc_b;
  kern_t k1, k2, k3;
  wmat_t w1, w2;
  bias_t b1, b2, b3, b4;

  localparam longint IN_BASE = 64'h105;      // word addresses (x64 bytes)
  localparam longint PAR_BASE = 64'h2000;
  localparam longint OUT_BASE = 64'h4000;
  localparam longint OUT2_BASE = 64'h6000;

  initial begin
    desc_t d;
    int t0, t_dw, t_dc;
    desc_valid = 0; desc = '0;
    for (int c = 0; c < L; c++) begin
      for (int p = 0; p < D; p++) begin
        x0[c][p] = $urandom_range(0, 2048) - 1024;
        zero_acc[c][p] = 0;
      end
      for (int t = 0; t < 9; t++) begin
        k1[c][t] = $urandom_range(0, 256) - 128;
        k2[c][t] = $urandom_range(0, 256) - 128;
        k3[c][t] = $urandom_range(0, 256) - 128;
      end
      for (int i = 0; i < L; i++) begin
        w1[c][i] = $urandom_range(0, 64) - 32;
        w2[c][i] = $urandom_range(0, 64) - 32;
      end
      b1[c] = $urandom_range(0, 512) - 256;
      b2[c] = $urandom_range(0, 512) - 256;
      b3[c] = $urandom_range(0, 512) - 256;
      b4[c] = $urandom_range(0, 512) - 256;
    end
    // DDR image: input tile, then parameters
    begin
      int v [L];
      for (int p = 0; p < D; p++) begin
        for (int c = 0; c < L; c++) v[c] = x0[c][p];
        u_ddr.mem[IN_BASE + p] = pack(v);
      end
      for (int t = 0; t < 9; t++) begin
        for (int c = 0; c < L; c++) v[c] = k1[c][t];
        u_ddr.mem[PAR_BASE + t] = pack(v);
        for (int c = 0; c < L; c++) v[c] = k2[c][t];
        u_ddr.mem[PAR_BASE + 9 + t] = pack(v);
        for (int c = 0; c < L; c++) v[c] = k3[c][t];
        u_ddr.mem[PAR_BASE + 18 + t] = pack(v);
      end
      u_ddr.mem[PAR_BASE + 32] = pack(b1);
      u_ddr.mem[PAR_BASE + 33] = pack(b2);
      u_ddr.mem[PAR_BASE + 34] = pack(b3);
      u_ddr.mem[PAR_BASE + 35] = pack(b4);
      for (int o = 0; o < L; o++) begin
        u_ddr.mem[PAR_BASE + 64 + o] = pack(w1[o]);
        u_ddr.mem[PAR_BASE + 96 + o] = pack(w2[o]);
      end
    end

    repeat (4) @(negedge clk);
    rst_n = 1;

    // loads
    d = mk(OP_LOAD_FM, 0, 0, 0, 0); d.ddr_addr = 32'(IN_BASE * 64); d.len = LENW'(D); d.fm_off = '0;
    send(d);
    d = mk(OP_LOAD_W, 0, 0, 0, 0); d.wsel = WSEL_DW; d.waddr = 6'd0; d.ddr_addr = 32'(PAR_BASE * 64); d.len = 13'd27;
    send(d);                                  // kernels k1, k2, k3 at words 0, 1, 2
    d = mk(OP_LOAD_W, 0, 0, 0, 0); d.wsel = WSEL_BIAS; d.baddr = 6'd0; d.ddr_addr = 32'((PAR_BASE + 32) * 64); d.len = 13'd4;
    send(d);                                  // biases b1..b4 at words 0..3
    d = mk(OP_LOAD_W, 0, 0, 0, 0); d.wsel = WSEL_PW; d.waddr = 6'd0; d.ddr_addr = 32'((PAR_BASE + 64) * 64); d.len = 13'd64;
    send(d);                                  // w1, w2 at words 0, 1

    // DW s1 + bias + act: buf0 -> buf1
    d = mk(OP_DW, 0, 1, FM_H, FM_W); d.waddr = 6'd0; d.baddr = 6'd0; d.final_op = 1; d.act_en = 1;
    t0 = cyc; send(d); t_dw = cyc - t0;
    dw_ref(x0, FM_H, FM_W, k1, 0, b1, 1, 1, r1);
    // DW s2 + bias: buf1 -> buf2
    d = mk(OP_DW, 1, 2, FM_H, FM_W); d.waddr = 6'd1; d.baddr = 6'd1; d.stride2 = 1; d.final_op = 1;
    send(d);
    dw_ref(r1, FM_H, FM_W, k2, 1, b2, 1, 0, r2);
    // PW s1 buf2 -> HP (partial sums)
    d = mk(OP_PW, 2, 3, FM_H / 2, FM_W / 2); d.waddr = 6'd0;
    send(d);
    pw_ref(r2, FM_H / 2, FM_W / 2, w1, 0, zero_acc, acc_a);
    // PW s2 buf1 + HP -> buf3, bias + act
    d = mk(OP_PW, 1, 3, FM_H, FM_W); d.waddr = 6'd1; d.baddr = 6'd2; d.stride2 = 1; d.acc_in = 1;
    d.final_op = 1; d.act_en = 1;
    send(d);
    pw_ref(r1, FM_H, FM_W, w2, 1, acc_a, acc_b);
    for (int c = 0; c < L; c++)
      for (int p = 0; p < D / 4; p++) r3[c][p] = post(acc_b[c][p], b3[c], 1, 1);
    // DECONV buf3 (16x76) -> buf4 (32x152), bias + act
    d = mk(OP_DECONV, 3, 4, FM_H / 2, FM_W / 2); d.waddr = 6'd2; d.baddr = 6'd3; d.final_op = 1; d.act_en = 1;
    t0 = cyc; send(d); t_dc = cyc - t0;
    dc_ref(r3, FM_H / 2, FM_W / 2, k3, b4, 1, 1, r4);
    // stores
    d = mk(OP_STORE_FM, 4, 0, 0, 0); d.ddr_addr = 32'(OUT_BASE * 64); d.len = LENW'(D);
    send(d);
    d = mk(OP_STORE_FM, 2, 0, 0, 0); d.ddr_addr = 32'(OUT2_BASE * 64); d.len = LENW'(D / 4);
    send(d);

    cm = r2;
    cmp_fm("dw_s2 output (buf2)", OUT2_BASE, D / 4);
    cm = r4;
    cmp_fm("deconv output (buf4)", OUT_BASE, D);

    // rates: DW one scan item per cycle, DECONV one per 4 cycles
    $display("cycles: dw pass %0d (scan %0d), deconv pass %0d (scan %0d)", t_dw,
             (FM_H + 1) * (FM_W + 1), t_dc, 4 * (FM_H / 2 + 1) * (FM_W / 2 + 1));
    checks++;
    if (t_dw < (FM_H + 1) * (FM_W + 1) || t_dw > (FM_H + 1) * (FM_W + 1) + 40) failures++;
    checks++;
    if (t_dc < 4 * (FM_H / 2 + 1) * (FM_W / 2 + 1) || t_dc > 4 * (FM_H / 2 + 1) * (FM_W / 2 + 1) + 40) failures++;
    checks++;
    if (dma_err) failures++;
    checks++;
    if (u_ddr.violations != 0) failures++;

    $display("mechanisms: stride2 windows %0d, hp writes %0d, hp reads %0d, deconv outputs %0d, negative activations %0d, pad items %0d, 4KB splits %0d, AXI stalls %0d",
             n_s2win, n_hpwr, n_hprd, n_dcout, n_neg, n_pad, n_split, u_ddr.stalls);
    checks++; if (n_s2win != D / 4) failures++;
    checks++; if (n_hpwr != D / 4) failures++;
    checks++; if (n_hprd != D / 4) failures++;
    checks++; if (n_dcout != D) failures++;
    checks++; if (n_neg == 0) failures++;
    checks++; if (n_pad == 0) failures++;
    checks++; if (n_split == 0) failures++;
    checks++; if (u_ddr.stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
