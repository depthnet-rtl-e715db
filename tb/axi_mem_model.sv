// axi_mem_model: behavioural AXI4 slave memory standing in for the DDR
// behind the processor's HP port.  Not synthesizable.
//
// Words of DATAW bits are stored in an associative array indexed by
// address / (DATAW/8).  INCR bursts only.  The ready signals are
// randomly withheld (about one cycle in four when STALL = 1) so masters
// see backpressure.  It counts bursts, and flags bursts that cross a
// 4 KB boundary or exceed 16 beats in 'violations'.
//
// Provenance: stands in for the DDR memory behind the HP port, which the
// paper uses but does not design; its random stalls are test stimulus.
module axi_mem_model #(
  parameter int unsigned AW    = 32,
  parameter int unsigned DATAW = 512,
  parameter bit          STALL = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [AW-1:0]      araddr,
  input  logic [7:0]         arlen,
  input  logic               arvalid,
  output logic               arready,
  output logic [DATAW-1:0]   rdata,
  output logic [1:0]         rresp,
  output logic               rlast,
  output logic               rvalid,
  input  logic               rready,
  input  logic [AW-1:0]      awaddr,
  input  logic [7:0]         awlen,
  input  logic               awvalid,
  output logic               awready,
  input  logic [DATAW-1:0]   wdata,
  input  logic               wlast,
  input  logic               wvalid,
  output logic               wready,
  output logic [1:0]         bresp,
  output logic               bvalid,
  input  logic               bready
);
  localparam int unsigned BYTES = DATAW / 8;
  logic [DATAW-1:0] mem [longint];
  int rd_bursts = 0, wr_bursts = 0, violations = 0, stalls = 0;

  function automatic logic [DATAW-1:0] peek(longint idx);
    return mem.exists(idx) ? mem[idx] : '0;
  endfunction

  function automatic bit go();
    return !STALL || ($urandom_range(0, 3) != 0);
  endfunction

  function automatic void check_burst(logic [AW-1:0] a, logic [7:0] l);
    longint first, last;
    first = longint'(a);
    last  = first + (longint'(l) + 1) * BYTES - 1;
    if ((first >> 12) != (last >> 12) || l > 8'd15) violations++;
  endfunction

  // read channel: one burst at a time
  initial begin
    arready = 0; rvalid = 0; rlast = 0; rdata = '0; rresp = 2'b00;
    forever begin
      @(posedge clk);
      if (rst_n && arvalid && go()) begin
        logic [AW-1:0] a;
        int n;
        arready <= 1;
        a = araddr; n = int'(arlen) + 1;
        check_burst(araddr, arlen);
        rd_bursts++;
        @(posedge clk);
        arready <= 0;
        for (int k = 0; k < n; k++) begin
          while (!go()) begin stalls++; rvalid <= 0; @(posedge clk); end
          rvalid <= 1;
          rdata  <= peek(longint'(a) / BYTES + k);
          rlast  <= (k == n - 1);
          @(posedge clk);
          while (!rready) @(posedge clk);
        end
        rvalid <= 0; rlast <= 0;
      end
    end
  end

  // write channel
  initial begin
    awready = 0; wready = 0; bvalid = 0; bresp = 2'b00;
    forever begin
      @(posedge clk);
      if (rst_n && awvalid && go()) begin
        logic [AW-1:0] a;
        int n, k;
        awready <= 1;
        a = awaddr; n = int'(awlen) + 1;
        check_burst(awaddr, awlen);
        wr_bursts++;
        @(posedge clk);
        awready <= 0;
        k = 0;
        while (k < n) begin
          if (go()) wready <= 1; else begin wready <= 0; stalls++; end
          @(posedge clk);
          if (wready && wvalid) begin
            mem[longint'(a) / BYTES + k] = wdata;
            if (wlast != (k == n - 1)) violations++;
            k++;
          end
        end
        wready <= 0;
        bvalid <= 1;
        @(posedge clk);
        while (!bready) @(posedge clk);
        bvalid <= 0;
      end
    end
  end
endmodule
