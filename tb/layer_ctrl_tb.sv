// layer_ctrl_tb: sends descriptors to layer_ctrl and checks the scan it
// generates: the sequence of source-buffer read addresses, pad items,
// output addresses and high-precision reads for pointwise passes (stride 1
// and 2), depthwise passes ((H+1)x(W+1) items) and deconvolution passes
// (one item per 4 cycles); and the DMA start/done handshake and the
// operation counter.
//
// Provenance: the scan order, issue spacing and drain are this design's
// own and are what is checked here.
module layer_ctrl_tb;
  import depthnet_pkg::*;
  logic clk = 0, rst_n = 0;
  logic desc_valid, desc_ready, busy;
  desc_t desc, cfg;
  logic [31:0] ops_done;
  logic pe_start, fm_rd_en, hp_rd_en, pe_valid, pe_pad, dma_start, dma_done;
  logic [FM_AW-1:0] fm_rd_addr, hp_rd_addr, pe_addr;
  int checks = 0, failures = 0;
  int rd_addrs [$], hp_addrs [$], pe_addrs [$];
  int n_valid, n_pad, last_valid_cyc, min_gap, cyc = 0;

  layer_ctrl #(.DRAIN(24)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      if (fm_rd_en) rd_addrs.push_back(int'(fm_rd_addr));
      if (hp_rd_en) hp_addrs.push_back(int'(hp_rd_addr));
      if (pe_valid) begin
        n_valid++;
        if (pe_pad) n_pad++;
        else pe_addrs.push_back(int'(pe_addr));
        if (last_valid_cyc >= 0 && cyc - last_valid_cyc < min_gap) min_gap = cyc - last_valid_cyc;
        last_valid_cyc = cyc;
      end
    end
  end

  // DMA stand-in: done 5 cycles after start
  initial begin
    dma_done = 0;
    forever begin
      @(posedge clk);
      if (dma_start) begin
        repeat (5) @(posedge clk);
        dma_done <= 1;
        @(posedge clk);
        dma_done <= 0;
      end
    end
  end

  task automatic run(input op_e op, input int h, input int w, input bit s2, input bit acc);
    desc = '0;
    desc.op = op; desc.h = DIMW'(h); desc.w = DIMW'(w); desc.stride2 = s2; desc.acc_in = acc;
    desc.len = 13'd4;
    rd_addrs.delete(); hp_addrs.delete(); pe_addrs.delete();
    n_valid = 0; n_pad = 0; last_valid_cyc = -1; min_gap = 1000;
    @(negedge clk);
    desc_valid = 1;
    @(negedge clk);
    desc_valid = 0;
    checks++;
    if (desc_ready || !busy) failures++;
    while (busy) @(negedge clk);
  endtask

  initial begin
    int k;
    desc_valid = 0; desc = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // pointwise, stride 1, accumulate
    run(OP_PW, 4, 6, 0, 1);
    checks++; if (n_valid != 24 || n_pad != 0) failures++;
    for (int i = 0; i < 24; i++) begin
      checks += 3;
      if (rd_addrs[i] != i) failures++;
      if (hp_addrs[i] != i) failures++;
      if (pe_addrs[i] != i) failures++;
    end
    checks++; if (ops_done != 1) failures++;
    // pointwise, stride 2, no accumulate
    run(OP_PW, 4, 6, 1, 0);
    checks++; if (n_valid != 6 || hp_addrs.size() != 0) failures++;
    k = 0;
    for (int y = 0; y < 2; y++)
      for (int x = 0; x < 3; x++) begin
        checks += 2;
        if (rd_addrs[k] != (2 * y) * 6 + 2 * x) begin failures++; $display("s2 rd %0d = %0d", k, rd_addrs[k]); end
        if (pe_addrs[k] != k) failures++;
        k++;
      end
    // depthwise 3x4: 20 scan items, 8 of them padding, reads 0..11
    run(OP_DW, 3, 4, 0, 0);
    checks++; if (n_valid != 20 || n_pad != 8 || rd_addrs.size() != 12) begin
      failures++; $display("dw items %0d pads %0d", n_valid, n_pad); end
    foreach (rd_addrs[i]) begin checks++; if (rd_addrs[i] != i) failures++; end
    checks++; if (min_gap != 1) failures++;
    // deconvolution 2x2: 9 scan items, 4 cycles apart
    run(OP_DECONV, 2, 2, 0, 0);
    checks++; if (n_valid != 9 || n_pad != 5) failures++;
    checks++; if (min_gap != 4) begin failures++; $display("deconv gap %0d", min_gap); end
    // DMA operation
    run(OP_LOAD_FM, 0, 0, 0, 0);
    checks++; if (n_valid != 0) failures++;
    checks++; if (ops_done != 5) begin failures++; $display("ops_done %0d", ops_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
