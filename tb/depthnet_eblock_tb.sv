// depthnet_eblock_tb: one encoder block of the network ("E block 2":
// 32 -> 32 channels, stride 2, with both residual shortcuts) run end to end
// on the accelerator at its default sizes, on one 152x32 input tile.
//
// Each conv of the block is depthwise separable (3x3 depthwise, then
// pointwise); the descriptor program is (buffers in brackets, HP = the
// high-precision buffer):
//   conv_a_extra : PW 1x1 s2 [0] -> HP (partial sums, no bias)
//   conv_a       : DW s2 [0] -> [2], PW + bias + LeakyReLU [2] -> [3]
//   conv_b + add : DW [3] -> [4], PW [4] + HP + bias + LeakyReLU -> [5]
//   conv_c       : DW [5] -> [6], PW + bias + LeakyReLU [6] -> [7]
//   feed-forward : PW with an identity matrix [5] -> HP
//   conv_d + add : DW [7] -> [8], PW [8] + HP + bias + LeakyReLU -> [9]
//   store [9]
// Both shortcut additions happen in the pointwise accumulator: the
// shortcut is first written to the high-precision buffer and the last
// pointwise pass of the main path adds it.  All ten feature-map buffers
// are used.  The stored output is compared with depthnet_ref_pkg and the
// cycle count of the block is printed.
//
// Provenance: the block structure (conv_a, conv_b, the 1x1 stride-2
// conv_a_extra shortcut, conv_c, conv_d and the feed-forward addition)
// and its channel counts are the paper's; the tile size is one buffer,
// and the placement of bias and LeakyReLU (after the additions) is this
// design's assumption.
module depthnet_eblock_tb;
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
  int n_hpwr = 0, n_hprd = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_pe.wr_valid && dut.u_pe.wr_hp) n_hpwr++;
    if (dut.u_ctrl.hp_rd_en) n_hprd++;
  end

  // ---- data -----------------------------------------------------------------
  localparam int OH = FM_H / 2, OW = FM_W / 2, OD = OH * OW;
  fmap_t x, da, a, db, s, dcm, c3, dd, y;
  accmap_t zero_acc, acc_x, acc_t, acc_f;
  kern_t ka, kb, kc, kd;
  wmat_t wx, wa, wb, wc, wi, wd;
  bias_t bka, bkb, bkc, bkd, ba, bb, bc, bd;

  localparam longint IN_BASE  = 64'h0;
  localparam longint PAR_BASE = 64'h2000;
  localparam longint OUT_BASE = 64'h4000;

  function automatic void rnd_k(ref kern_t k);
    for (int c = 0; c < L; c++) for (int t = 0; t < 9; t++) k[c][t] = $urandom_range(0, 256) - 128;
  endfunction
  function automatic void rnd_w(ref wmat_t w);
    for (int o = 0; o < L; o++) for (int i = 0; i < L; i++) w[o][i] = $urandom_range(0, 64) - 32;
  endfunction
  function automatic void rnd_b(ref bias_t b);
    for (int c = 0; c < L; c++) b[c] = $urandom_range(0, 512) - 256;
  endfunction

  task automatic put_k(longint at, kern_t k);
    int v [L];
    for (int t = 0; t < 9; t++) begin
      for (int c = 0; c < L; c++) v[c] = k[c][t];
      u_ddr.mem[at + t] = pack(v);
    end
  endtask
  task automatic put_w(longint at, wmat_t w);
    for (int o = 0; o < L; o++) u_ddr.mem[at + o] = pack(w[o]);
  endtask

  initial begin
    desc_t d;
    int t0, t_blk;
    desc_valid = 0; desc = '0;
    for (int c = 0; c < L; c++)
      for (int p = 0; p < D; p++) begin
        x[c][p] = $urandom_range(0, 2048) - 1024;
        zero_acc[c][p] = 0;
      end
    rnd_k(ka); rnd_k(kb); rnd_k(kc); rnd_k(kd);
    rnd_w(wx); rnd_w(wa); rnd_w(wb); rnd_w(wc); rnd_w(wd);
    for (int o = 0; o < L; o++) for (int i = 0; i < L; i++) wi[o][i] = (o == i) ? (1 << FRAC) : 0;
    rnd_b(bka); rnd_b(bkb); rnd_b(bkc); rnd_b(bkd); rnd_b(ba); rnd_b(bb); rnd_b(bc); rnd_b(bd);
    begin
      int v [L];
      for (int p = 0; p < D; p++) begin
        for (int c = 0; c < L; c++) v[c] = x[c][p];
        u_ddr.mem[IN_BASE + p] = pack(v);
      end
      put_k(PAR_BASE + 0, ka); put_k(PAR_BASE + 9, kb); put_k(PAR_BASE + 18, kc); put_k(PAR_BASE + 27, kd);
      u_ddr.mem[PAR_BASE + 40] = pack(bka); u_ddr.mem[PAR_BASE + 41] = pack(bkb);
      u_ddr.mem[PAR_BASE + 42] = pack(bkc); u_ddr.mem[PAR_BASE + 43] = pack(bkd);
      u_ddr.mem[PAR_BASE + 44] = pack(ba);  u_ddr.mem[PAR_BASE + 45] = pack(bb);
      u_ddr.mem[PAR_BASE + 46] = pack(bc);  u_ddr.mem[PAR_BASE + 47] = pack(bd);
      put_w(PAR_BASE + 64, wx);  put_w(PAR_BASE + 96, wa);  put_w(PAR_BASE + 128, wb);
      put_w(PAR_BASE + 160, wc); put_w(PAR_BASE + 192, wi); put_w(PAR_BASE + 224, wd);
    end

    repeat (4) @(negedge clk);
    rst_n = 1;
    t0 = cyc;

    d = mk(OP_LOAD_FM, 0, 0, 0, 0); d.ddr_addr = 32'(IN_BASE * 64); d.len = LENW'(D);
    send(d);
    d = mk(OP_LOAD_W, 0, 0, 0, 0); d.wsel = WSEL_DW; d.ddr_addr = 32'(PAR_BASE * 64); d.len = 13'd36;
    send(d);                                  // ka, kb, kc, kd at words 0..3
    d = mk(OP_LOAD_W, 0, 0, 0, 0); d.wsel = WSEL_BIAS; d.ddr_addr = 32'((PAR_BASE + 40) * 64); d.len = 13'd8;
    send(d);                                  // bka..bkd at 0..3, ba..bd at 4..7
    d = mk(OP_LOAD_W, 0, 0, 0, 0); d.wsel = WSEL_PW; d.ddr_addr = 32'((PAR_BASE + 64) * 64); d.len = 13'd192;
    send(d);                                  // wx, wa, wb, wc, identity, wd at 0..5

    // conv_a_extra: 1x1 stride 2 shortcut into the high-precision buffer
    d = mk(OP_PW, 0, 1, FM_H, FM_W); d.waddr = 6'd0; d.stride2 = 1;
    send(d);
    pw_ref(x, FM_H, FM_W, wx, 1, zero_acc, acc_x);
    // conv_a (stride 2)
    d = mk(OP_DW, 0, 2, FM_H, FM_W); d.waddr = 6'd0; d.baddr = 6'd0; d.stride2 = 1; d.final_op = 1;
    send(d);
    dw_ref(x, FM_H, FM_W, ka, 1, bka, 1, 0, da);
    d = mk(OP_PW, 2, 3, OH, OW); d.waddr = 6'd1; d.baddr = 6'd4; d.final_op = 1; d.act_en = 1;
    send(d);
    pw_ref(da, OH, OW, wa, 0, zero_acc, acc_t);
    for (int c = 0; c < L; c++) for (int p = 0; p < OD; p++) a[c][p] = post(acc_t[c][p], ba[c], 1, 1);
    // conv_b + shortcut
    d = mk(OP_DW, 3, 4, OH, OW); d.waddr = 6'd1; d.baddr = 6'd1; d.final_op = 1;
    send(d);
    dw_ref(a, OH, OW, kb, 0, bkb, 1, 0, db);
    d = mk(OP_PW, 4, 5, OH, OW); d.waddr = 6'd2; d.baddr = 6'd5; d.acc_in = 1; d.final_op = 1; d.act_en = 1;
    send(d);
    pw_ref(db, OH, OW, wb, 0, acc_x, acc_t);
    for (int c = 0; c < L; c++) for (int p = 0; p < OD; p++) s[c][p] = post(acc_t[c][p], bb[c], 1, 1);
    // conv_c
    d = mk(OP_DW, 5, 6, OH, OW); d.waddr = 6'd2; d.baddr = 6'd2; d.final_op = 1;
    send(d);
    dw_ref(s, OH, OW, kc, 0, bkc, 1, 0, dcm);
    d = mk(OP_PW, 6, 7, OH, OW); d.waddr = 6'd3; d.baddr = 6'd6; d.final_op = 1; d.act_en = 1;
    send(d);
    pw_ref(dcm, OH, OW, wc, 0, zero_acc, acc_t);
    for (int c = 0; c < L; c++) for (int p = 0; p < OD; p++) c3[c][p] = post(acc_t[c][p], bc[c], 1, 1);
    // feed-forward: identity pointwise pass puts s into the HP buffer
    d = mk(OP_PW, 5, 1, OH, OW); d.waddr = 6'd4;
    send(d);
    pw_ref(s, OH, OW, wi, 0, zero_acc, acc_f);
    // conv_d + feed-forward
    d = mk(OP_DW, 7, 8, OH, OW); d.waddr = 6'd3; d.baddr = 6'd3; d.final_op = 1;
    send(d);
    dw_ref(c3, OH, OW, kd, 0, bkd, 1, 0, dd);
    d = mk(OP_PW, 8, 9, OH, OW); d.waddr = 6'd5; d.baddr = 6'd7; d.acc_in = 1; d.final_op = 1; d.act_en = 1;
    send(d);
    pw_ref(dd, OH, OW, wd, 0, acc_f, acc_t);
    for (int c = 0; c < L; c++) for (int p = 0; p < OD; p++) y[c][p] = post(acc_t[c][p], bd[c], 1, 1);

    d = mk(OP_STORE_FM, 9, 0, 0, 0); d.ddr_addr = 32'(OUT_BASE * 64); d.len = LENW'(OD);
    send(d);
    t_blk = cyc - t0;

    cm = y;
    cmp_fm("block output", OUT_BASE, OD);

    $display("encoder block on one 152x32 input tile: %0d cycles from first load to last store", t_blk);
    $display("mechanisms: hp writes %0d, hp reads %0d, AXI stalls %0d", n_hpwr, n_hprd, u_ddr.stalls);
    checks++; if (n_hpwr != 2 * OD) failures++;
    checks++; if (n_hprd != 2 * OD) failures++;
    checks++; if (u_ddr.stalls == 0) failures++;
    checks++; if (dma_err) failures++;
    checks++; if (u_ddr.violations != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
