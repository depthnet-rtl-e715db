// axi_dma_tb: runs axi_dma against the behavioural AXI memory with random
// backpressure.  A read of 70 words starting 3 words below a 4 KB boundary
// must arrive in the buffer in order; a write of 45 words from a buffer
// model must land in memory.  Burst rules (<= 16 beats, no 4 KB crossing,
// wlast) are checked by the memory model; the 4 KB split and the done
// pulse are counted.
//
// Provenance: the checks follow the AXI4 rules (INCR bursts, no 4 KB
// crossing); the burst length limit of 16 is this design's own choice.
module axi_dma_tb;
  localparam int AW = 32, DATAW = 512, LENW = 13;
  logic clk = 0, rst_n = 0;
  logic start = 0, dir = 0;
  logic [AW-1:0] ddr_addr = '0;
  logic [LENW-1:0] len = '0;
  logic busy, done, err;
  logic buf_wr_en, buf_rd_en;
  logic [LENW-1:0] buf_idx;
  logic [DATAW-1:0] buf_wr_data, buf_rd_data;
  logic [AW-1:0] m_axi_araddr, m_axi_awaddr;
  logic [7:0] m_axi_arlen, m_axi_awlen;
  logic [2:0] m_axi_arsize, m_axi_awsize;
  logic [1:0] m_axi_arburst, m_axi_awburst, m_axi_rresp, m_axi_bresp;
  logic m_axi_arvalid, m_axi_arready, m_axi_rlast, m_axi_rvalid, m_axi_rready;
  logic m_axi_awvalid, m_axi_awready, m_axi_wlast, m_axi_wvalid, m_axi_wready;
  logic m_axi_bvalid, m_axi_bready;
  logic [DATAW-1:0] m_axi_rdata, m_axi_wdata;
  logic [DATAW/8-1:0] m_axi_wstrb;
  int checks = 0, failures = 0, ndone = 0;
  logic [DATAW-1:0] bufmem [0:127];

  axi_dma #(.AW(AW), .DATAW(DATAW), .LENW(LENW), .MAX_BURST(16)) dut (.*);

  axi_mem_model #(.AW(AW), .DATAW(DATAW)) u_mem (
    .clk, .rst_n,
    .araddr(m_axi_araddr), .arlen(m_axi_arlen), .arvalid(m_axi_arvalid), .arready(m_axi_arready),
    .rdata(m_axi_rdata), .rresp(m_axi_rresp), .rlast(m_axi_rlast), .rvalid(m_axi_rvalid), .rready(m_axi_rready),
    .awaddr(m_axi_awaddr), .awlen(m_axi_awlen), .awvalid(m_axi_awvalid), .awready(m_axi_awready),
    .wdata(m_axi_wdata), .wlast(m_axi_wlast), .wvalid(m_axi_wvalid), .wready(m_axi_wready),
    .bresp(m_axi_bresp), .bvalid(m_axi_bvalid), .bready(m_axi_bready)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // buffer model: writes from the DMA, registered reads
  always @(posedge clk) begin
    if (buf_wr_en) bufmem[buf_idx] <= buf_wr_data;
    if (buf_rd_en) buf_rd_data <= bufmem[buf_idx];
  end
  always @(negedge clk) if (done) ndone++;

  function automatic logic [DATAW-1:0] pat(longint i);
    return {16{32'(i * 2246822519 + 374761393)}};
  endfunction

  initial begin
    longint base;
    int rb;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // DDR -> buffer, crossing a 4 KB page
    base = (4096 - 3 * 64) / 64;
    for (int i = 0; i < 70; i++) u_mem.mem[base + i] = pat(base + i);
    @(negedge clk);
    start = 1; dir = 0; ddr_addr = AW'(base * 64); len = 13'd70;
    @(negedge clk);
    start = 0;
    wait (done);
    repeat (2) @(negedge clk);
    for (int i = 0; i < 70; i++) begin
      checks++;
      if (bufmem[i] != pat(base + i)) begin failures++; if (failures < 5) $display("rd word %0d", i); end
    end
    rb = u_mem.rd_bursts;
    checks++;
    if (rb != 6) begin failures++; $display("read bursts %0d (expected 3+16+16+16+16+3)", rb); end
    // buffer -> DDR
    for (int i = 0; i < 45; i++) bufmem[i] = pat(1000 + i);
    @(negedge clk);
    start = 1; dir = 1; ddr_addr = 32'h0001_0000 - 32'd640; len = 13'd45;
    @(negedge clk);
    start = 0;
    wait (done);
    repeat (2) @(negedge clk);
    for (int i = 0; i < 45; i++) begin
      checks++;
      if (u_mem.peek((32'h0001_0000 - 640) / 64 + i) != pat(1000 + i)) begin
        failures++; if (failures < 5) $display("wr word %0d", i);
      end
    end
    checks++;
    if (u_mem.wr_bursts != 4) begin failures++; $display("write bursts %0d", u_mem.wr_bursts); end
    checks++;
    if (u_mem.violations != 0) begin failures++; $display("violations %0d", u_mem.violations); end
    checks++;
    if (ndone != 2 || err) begin failures++; $display("done %0d err %0b", ndone, err); end
    checks++;
    if (u_mem.stalls == 0) failures++;   // backpressure exercised
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
