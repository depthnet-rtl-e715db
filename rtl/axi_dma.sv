// axi_dma: AXI4 master moving a run of DATAW-bit words between DDR and an
// on-chip buffer (the accelerator's path to the processor's HP port).
//
// A command (start, dir, ddr_addr, len) moves 'len' words:
//   dir = 0 : DDR -> buffer.  Read bursts; every R beat becomes a buffer
//             write (buf_wr_en, buf_idx = word number 0..len-1).
//   dir = 1 : buffer -> DDR.  The word is requested (buf_rd_en, buf_idx),
//             taken one cycle later from buf_rd_data and sent on W.
// Bursts are INCR, full width, at most MAX_BURST beats and never cross a
// 4 KB boundary; one burst is outstanding at a time.  ddr_addr must be
// aligned to DATAW/8 bytes.  'done' pulses for one cycle at the end;
// 'err' is set by a non-OKAY response and cleared by the next start.
// Writes take at least two cycles per beat.  Widths, burst length and
// the one-burst-at-a-time policy are this design's choices; the AXI4 link
// to DDR through the HP port is the paper's.  m_axi_wdata is buf_rd_data
// passed straight through, and the burst type, size and cache fields are
// constants, as AXI4 INCR full-width bursts need.
module axi_dma #(
  parameter int unsigned AW        = 32,
  parameter int unsigned DATAW     = 512,
  parameter int unsigned LENW      = 13,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               start,
  input  logic               dir,
  input  logic [AW-1:0]      ddr_addr,
  input  logic [LENW-1:0]    len,
  output logic               busy,
  output logic               done,
  output logic               err,
  // buffer side
  output logic               buf_wr_en,
  output logic               buf_rd_en,
  output logic [LENW-1:0]    buf_idx,
  output logic [DATAW-1:0]   buf_wr_data,
  input  logic [DATAW-1:0]   buf_rd_data,
  // AXI4 read address / data
  output logic [AW-1:0]      m_axi_araddr,
  output logic [7:0]         m_axi_arlen,
  output logic [2:0]         m_axi_arsize,
  output logic [1:0]         m_axi_arburst,
  output logic               m_axi_arvalid,
  input  logic               m_axi_arready,
  input  logic [DATAW-1:0]   m_axi_rdata,
  input  logic [1:0]         m_axi_rresp,
  input  logic               m_axi_rlast,
  input  logic               m_axi_rvalid,
  output logic               m_axi_rready,
  // AXI4 write address / data / response
  output logic [AW-1:0]      m_axi_awaddr,
  output logic [7:0]         m_axi_awlen,
  output logic [2:0]         m_axi_awsize,
  output logic [1:0]         m_axi_awburst,
  output logic               m_axi_awvalid,
  input  logic               m_axi_awready,
  output logic [DATAW-1:0]   m_axi_wdata,
  output logic [DATAW/8-1:0] m_axi_wstrb,
  output logic               m_axi_wlast,
  output logic               m_axi_wvalid,
  input  logic               m_axi_wready,
  input  logic [1:0]         m_axi_bresp,
  input  logic               m_axi_bvalid,
  output logic               m_axi_bready
);
  localparam int unsigned BYTES = DATAW / 8;
  localparam int unsigned BSH   = $clog2(BYTES);
  localparam int unsigned MBW   = $clog2(MAX_BURST) + 1;

  typedef enum logic [2:0] {S_IDLE, S_CALC, S_AR, S_R, S_AW, S_WRD, S_WSEND, S_B} state_e;
  state_e state;

  logic [AW-1:0]    addr;
  logic [LENW-1:0]  remain;      // words not yet put in a burst
  logic [LENW-1:0]  idx;
  logic [MBW-1:0]   blen, bcnt;  // current burst length / beats sent
  logic [DATAW-1:0] wdata_q;
  logic             cap;
  logic             dir_q;

  // beats in the next burst: limited by MAX_BURST, what is left and the 4 KB page
  logic [12:0] to_page;
  logic [MBW-1:0] nxt_blen;
  always_comb begin
    to_page = 13'((13'd4096 - {1'b0, addr[11:0]}) >> BSH);
    nxt_blen = MBW'(MAX_BURST);
    if (remain < LENW'(MAX_BURST)) nxt_blen = MBW'(remain);
    if (to_page < 13'(nxt_blen)) nxt_blen = MBW'(to_page);
  end

  assign busy          = (state != S_IDLE);
  assign m_axi_araddr  = addr;
  assign m_axi_awaddr  = addr;
  assign m_axi_arlen   = 8'(blen - 1'b1);
  assign m_axi_awlen   = 8'(blen - 1'b1);
  assign m_axi_arsize  = 3'(BSH);
  assign m_axi_awsize  = 3'(BSH);
  assign m_axi_arburst = 2'b01;
  assign m_axi_awburst = 2'b01;
  assign m_axi_arvalid = (state == S_AR);
  assign m_axi_awvalid = (state == S_AW);
  assign m_axi_rready  = (state == S_R);
  assign m_axi_wvalid  = (state == S_WSEND);
  assign m_axi_wdata   = cap ? buf_rd_data : wdata_q;
  assign m_axi_wstrb   = '1;
  assign m_axi_wlast   = (bcnt == blen - 1'b1);
  assign m_axi_bready  = (state == S_B);

  assign buf_idx     = idx;
  assign buf_wr_en   = (state == S_R) && m_axi_rvalid;
  assign buf_wr_data = m_axi_rdata;
  assign buf_rd_en   = (state == S_WRD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; addr <= '0; remain <= '0; idx <= '0; blen <= '0;
      bcnt <= '0; cap <= 1'b0; wdata_q <= '0; dir_q <= 1'b0; done <= 1'b0; err <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          addr   <= ddr_addr;
          remain <= len;
          idx    <= '0;
          dir_q  <= dir;
          err    <= 1'b0;
          if (len == '0) done <= 1'b1;
          else           state <= S_CALC;
        end
        S_CALC: begin
          blen  <= nxt_blen;
          bcnt  <= '0;
          state <= dir_q ? S_AW : S_AR;
        end
        S_AR: if (m_axi_arready) state <= S_R;
        S_R: if (m_axi_rvalid) begin
          idx <= idx + 1'b1;
          if (m_axi_rresp[1]) err <= 1'b1;
          if (m_axi_rlast) begin
            addr   <= addr + (AW'(blen) << BSH);
            remain <= remain - LENW'(blen);
            if (remain == LENW'(blen)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else state <= S_CALC;
          end
        end
        S_AW: if (m_axi_awready) state <= S_WRD;
        S_WRD: begin
          cap   <= 1'b1;
          state <= S_WSEND;
        end
        S_WSEND: begin
          if (cap) begin
            wdata_q <= buf_rd_data;
            cap     <= 1'b0;
          end
          if (m_axi_wready) begin
            idx  <= idx + 1'b1;
            bcnt <= bcnt + 1'b1;
            cap  <= 1'b0;
            state <= m_axi_wlast ? S_B : S_WRD;
          end
        end
        S_B: if (m_axi_bvalid) begin
          if (m_axi_bresp[1]) err <= 1'b1;
          addr   <= addr + (AW'(blen) << BSH);
          remain <= remain - LENW'(blen);
          if (remain == LENW'(blen)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_CALC;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI: address channels hold their payload while valid is high
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr))
    else $error("AR payload changed before handshake");
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_axi_wvalid && !m_axi_wready |=> m_axi_wvalid && $stable(m_axi_wdata))
    else $error("W payload changed before handshake");
endmodule
