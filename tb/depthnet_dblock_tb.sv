// depthnet_dblock_tb: one decoder block of the network (the last one,
// "D block 3": 32 input channels upsampled, concatenated with a 32-channel
// encoder output, convolved to 32 channels) run end to end on the
// accelerator at its default sizes, on one output tile of 152 x 32.
//
// The block is depthwise separable throughout, so it becomes this
// descriptor program (buffers in brackets):
//   load input 76x16x32 [0], encoder skip 152x32x32 [1], parameters
//   upsample : DECONV 3x3 s2 + bias [0] -> [2], then PW 32->32 + bias +
//              LeakyReLU [2] -> [3]
//   concat + conv : DW 3x3 on each 32-channel half ([3] -> [4], [1] -> [5]),
//              then the 64->32 pointwise layer as two passes, the first
//              half into the high-precision buffer, the second half
//              accumulated, + bias + LeakyReLU -> [6]
//   store [6] and [3]
// The concatenation is therefore never materialised: it is the split of
// the 64-input pointwise layer over two buffers.  Every stored value is
// compared with depthnet_ref_pkg; the cycle count of the whole block is
// printed, and the test fails if the upsample, the high-precision
// accumulation or the AXI stalls never happened.
//
// Provenance: the block structure (upsample, concat, conv) and its channel
// counts are the paper's; the tile size is one feature-map buffer, and the
// placement of bias and LeakyReLU inside the block is this design's
// assumption.
module depthnet_dblock_tb;
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
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
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

  // ---- mechanism counters --------------------------------------------------
  int n_hpwr = 0, n_hprd = 0, n_dcout = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_pe.wr_valid && dut.u_pe.wr_hp) n_hpwr++;
    if (dut.u_ctrl.hp_rd_en) n_hprd++;
    if (dut.u_pe.dc_ov) n_dcout++;
  end

  // ---- data -----------------------------------------------------------------
  localparam int IH = FM_H / 2, IW = FM_W / 2, ID = IH * IW;
  fmap_t x, e, dc, u, ca, cb, y;
  accmap_t zero_acc, acc_a, acc_b;
  kern_t kd, kca, kcb;
  wmat_t wu, wca, wcb;
  bias_t bd, bu, bca, bcb, bc;

  localparam longint IN_BASE   = 64'h0;
  localparam longint SKIP_BASE = 64'h1000;
  localparam longint PAR_BASE  = 64'h3000;
  localparam longint OUT_BASE  = 64'h4000;
  localparam longint UP_BASE   = 64'h6000;

  function automatic void rnd_k(ref kern_t k);
    for (int c = 0; c < L; c++) for (int t = 0; t < 9; t++) k[c][t] = $urandom_range(0, 256) - 128;
  endfunction
  function automatic void rnd_w(ref wmat_t w);
    for (int o = 0; o < L; o++) for (int i = 0; i < L; i++) w[o][i] = $urandom_range(0, 64) - 32;
  endfunction
  function automatic void rnd_b(ref bias_t b);
    for (int c = 0; c < L; c++) b[c] = $urandom_range(0, 512) - 256;
  endfunction

  initial begin
    desc_t d;
    int t0, t_blk;
    desc_valid = 0; desc = '0;
    for (int c = 0; c < L; c++)
      for (int p = 0; p < D; p++) begin
        x[c][p] = (p < ID) ? $urandom_range(0, 2048) - 1024 : 0;
        e[c][p] = $urandom_range(0, 2048) - 1024;
        zero_acc[c][p] = 0;
      end
    rnd_k(kd); rnd_k(kca); rnd_k(kcb);
    rnd_w(wu); rnd_w(wca); rnd_w(wcb);
    rnd_b(bd); rnd_b(bu); rnd_b(bca); rnd_b(bcb); rnd_b(bc);
    begin
      int v [L];
      for (int p = 0; p < D; p++) begin
        for (int c = 0; c < L; c++) v[c] = x[c][p];
        if (p < ID) u_ddr.mem[IN_BASE + p] = pack(v);
        for (int c = 0; c < L; c++) v[c] = e[c][p];
        u_ddr.mem[SKIP_BASE + p] = pack(v);
      end
      for (int t = 0; t < 9; t++) begin
        for (int c = 0; c < L; c++) v[c] = kd[c][t];
        u_ddr.mem[PAR_BASE + t] = pack(v);
        for (int c = 0; c < L; c++) v[c] = kca[c][t];
        u_ddr.mem[PAR_BASE + 9 + t] = pack(v);
        for (int c = 0; c < L; c++) v[c] = kcb[c][t];
        u_ddr.mem[PAR_BASE + 18 + t] = pack(v);
      end
      u_ddr.mem[PAR_BASE + 32] = pack(bd);
      u_ddr.mem[PAR_BASE + 33] = pack(bu);
      u_ddr.mem[PAR_BASE + 34] = pack(bca);
      u_ddr.mem[PAR_BASE + 35] = pack(bcb);
      u_ddr.mem[PAR_BASE + 36] = pack(bc);
      for (int o = 0; o < L; o++) begin
        u_ddr.mem[PAR_BASE + 64 + o]  = pack(wu[o]);
        u_ddr.mem[PAR_BASE + 96 + o]  = pack(wca[o]);
        u_ddr.mem[PAR_BASE + 128 + o] = pack(wcb[o]);
      end
    end

    repeat (4) @(negedge clk);
    rst_n = 1;
    t0 = cyc;

    d = mk(OP_LOAD_FM, 0, 0, 0, 0); d.ddr_addr = 32'(IN_BASE * 64); d.len = LENW'(ID);
    send(d);
    d = mk(OP_LOAD_FM, 0, 1, 0, 0); d.ddr_addr = 32'(SKIP_BASE * 64); d.len = LENW'(D);
    send(d);
    d = mk(OP_LOAD_W, 0, 0, 0, 0); d.wsel = WSEL_DW; d.ddr_addr = 32'(PAR_BASE * 64); d.len = 13'd27;
    send(d);                                  // kd, kca, kcb at words 0, 1, 2
    d = mk(OP_LOAD_W, 0, 0, 0, 0); d.wsel = WSEL_BIAS; d.ddr_addr = 32'((PAR_BASE + 32) * 64); d.len = 13'd5;
    send(d);                                  // bd, bu, bca, bcb, bc at words 0..4
    d = mk(OP_LOAD_W, 0, 0, 0, 0); d.wsel = WSEL_PW; d.ddr_addr = 32'((PAR_BASE + 64) * 64); d.len = 13'd96;
    send(d);                                  // wu, wca, wcb at words 0, 1, 2

    // upsample: depthwise deconvolution then pointwise
    d = mk(OP_DECONV, 0, 2, IH, IW); d.waddr = 6'd0; d.baddr = 6'd0; d.final_op = 1;
    send(d);
    dc_ref(x, IH, IW, kd, bd, 1, 0, dc);
    d = mk(OP_PW, 2, 3, FM_H, FM_W); d.waddr = 6'd0; d.baddr = 6'd1; d.final_op = 1; d.act_en = 1;
    send(d);
    pw_ref(dc, FM_H, FM_W, wu, 0, zero_acc, acc_a);
    for (int c = 0; c < L; c++) for (int p = 0; p < D; p++) u[c][p] = post(acc_a[c][p], bu[c], 1, 1);

    // concat + depthwise-separable conv
    d = mk(OP_DW, 3, 4, FM_H, FM_W); d.waddr = 6'd1; d.baddr = 6'd2; d.final_op = 1;
    send(d);
    dw_ref(u, FM_H, FM_W, kca, 0, bca, 1, 0, ca);
    d = mk(OP_DW, 1, 5, FM_H, FM_W); d.waddr = 6'd2; d.baddr = 6'd3; d.final_op = 1;
    send(d);
    dw_ref(e, FM_H, FM_W, kcb, 0, bcb, 1, 0, cb);
    d = mk(OP_PW, 4, 6, FM_H, FM_W); d.waddr = 6'd1;
    send(d);
    pw_ref(ca, FM_H, FM_W, wca, 0, zero_acc, acc_a);
    d = mk(OP_PW, 5, 6, FM_H, FM_W); d.waddr = 6'd2; d.baddr = 6'd4; d.acc_in = 1; d.final_op = 1; d.act_en = 1;
    send(d);
    pw_ref(cb, FM_H, FM_W, wcb, 0, acc_a, acc_b);
    for (int c = 0; c < L; c++) for (int p = 0; p < D; p++) y[c][p] = post(acc_b[c][p], bc[c], 1, 1);

    d = mk(OP_STORE_FM, 6, 0, 0, 0); d.ddr_addr = 32'(OUT_BASE * 64); d.len = LENW'(D);
    send(d);
    t_blk = cyc - t0;
    d = mk(OP_STORE_FM, 3, 0, 0, 0); d.ddr_addr = 32'(UP_BASE * 64); d.len = LENW'(D);
    send(d);

    cm = u;
    cmp_fm("upsample output", UP_BASE, D);
    cm = y;
    cmp_fm("block output", OUT_BASE, D);

    $display("decoder block on one 152x32 tile: %0d cycles from first load to last store", t_blk);
    $display("mechanisms: deconv outputs %0d, hp writes %0d, hp reads %0d, AXI stalls %0d",
             n_dcout, n_hpwr, n_hprd, u_ddr.stalls);
    checks++; if (n_dcout != D) failures++;
    checks++; if (n_hpwr != D) failures++;
    checks++; if (n_hprd != D) failures++;
    checks++; if (u_ddr.stalls == 0) failures++;
    checks++; if (dma_err) failures++;
    checks++; if (u_ddr.violations != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
