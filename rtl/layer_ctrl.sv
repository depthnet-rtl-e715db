// layer_ctrl: control logic of the accelerator.
//
// Executes operation descriptors (desc_t) one at a time, in the order the
// host sends them:
//   OP_LOAD_FM / OP_STORE_FM / OP_LOAD_W : starts the DMA and waits for it;
//   OP_PW, OP_DW, OP_DECONV              : pulses pe_start, then scans the
//                                          source buffer (loop 2 of the loop
//                                          nests: rows, then columns).
// Scan orders:
//   PW     : output pixels (yo, xo) of an (h>>s) x (w>>s) map, reading input
//            pixel (yo<<s, xo<<s); one pixel per cycle; with acc_in the
//            high-precision buffer is read at the output address as well.
//   DW     : (h+1) x (w+1) positions, reading pixel (ys, xs) when inside the
//            map and sending a zero (pe_pad) for the extra row and column;
//            one position per cycle.
//   DECONV : as DW, one position every 4 cycles, since dw_deconv emits four
//            outputs per input patch.
// pe_valid / pe_pad / pe_addr are delayed by the one-cycle buffer read
// latency so they line up with the read data.  After the last scan item the
// controller waits DRAIN cycles for the pipelines to empty, then counts the
// operation in ops_done.  The descriptor format and the drain rule are this
// design's own.
//
// Provenance: the paper has the host run a predefined routine of layer
// operations; the descriptor format, the scan order with its extra zero
// row and column, the 4-cycle deconvolution issue spacing and the fixed
// drain wait are this design's own.
module layer_ctrl
  import depthnet_pkg::*;
#(
  parameter int unsigned DRAIN = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  // descriptors
  input  logic              desc_valid,
  output logic              desc_ready,
  input  desc_t             desc,
  output desc_t             cfg,
  output logic              busy,
  output logic [31:0]       ops_done,
  // process engine / buffers
  output logic              pe_start,
  output logic              fm_rd_en,
  output logic [FM_AW-1:0]  fm_rd_addr,
  output logic              hp_rd_en,
  output logic [FM_AW-1:0]  hp_rd_addr,
  output logic              pe_valid,
  output logic              pe_pad,
  output logic [FM_AW-1:0]  pe_addr,
  // DMA
  output logic              dma_start,
  input  logic              dma_done
);
  typedef enum logic [2:0] {S_IDLE, S_PREP, S_SCAN, S_DRAIN, S_DMA} state_e;
  state_e state;

  logic [DIMW-1:0]  y, x, ylim, xlim;     // scan counters and their last values
  logic [FM_AW-1:0] rd_addr, row_base, out_addr;
  logic [1:0]       gap;
  logic [5:0]       wait_cnt;
  logic             iss, iss_pad, last;
  logic             is_pw;

  assign is_pw      = (cfg.op == OP_PW);
  assign desc_ready = (state == S_IDLE);
  assign busy       = (state != S_IDLE);

  // issue one scan item this cycle?
  always_comb begin
    iss     = (state == S_SCAN) && (gap == '0);
    iss_pad = !is_pw && ((y == ylim) || (x == xlim));
    last    = (y == ylim) && (x == xlim);
  end

  assign fm_rd_en   = iss && !iss_pad;
  assign fm_rd_addr = rd_addr;
  assign hp_rd_en   = iss && is_pw && cfg.acc_in;
  assign hp_rd_addr = out_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cfg <= '0; ops_done <= '0; pe_start <= 1'b0; dma_start <= 1'b0;
      y <= '0; x <= '0; ylim <= '0; xlim <= '0; rd_addr <= '0; row_base <= '0;
      out_addr <= '0; gap <= '0; wait_cnt <= '0;
      pe_valid <= 1'b0; pe_pad <= 1'b0; pe_addr <= '0;
    end else begin
      pe_start  <= 1'b0;
      dma_start <= 1'b0;
      pe_valid  <= iss;
      pe_pad    <= iss_pad;
      pe_addr   <= out_addr;
      unique case (state)
        S_IDLE: if (desc_valid) begin
          cfg <= desc;
          y <= '0; x <= '0; rd_addr <= '0; row_base <= '0; out_addr <= '0; gap <= '0;
          if (desc.op == OP_PW) begin
            ylim <= (desc.stride2 ? (desc.h >> 1) : desc.h) - 1'b1;
            xlim <= (desc.stride2 ? (desc.w >> 1) : desc.w) - 1'b1;
          end else begin
            ylim <= desc.h;
            xlim <= desc.w;
          end
          if (desc.op == OP_PW || desc.op == OP_DW || desc.op == OP_DECONV) begin
            pe_start <= 1'b1;
            wait_cnt <= 6'd2;          // weight-buffer read settles
            state    <= S_PREP;
          end else begin
            dma_start <= 1'b1;
            state     <= S_DMA;
          end
        end
        S_PREP: begin
          wait_cnt <= wait_cnt - 1'b1;
          if (wait_cnt == 6'd1) state <= S_SCAN;
        end
        S_SCAN: begin
          if (gap != '0) gap <= gap - 1'b1;
          else begin
            if (cfg.op == OP_DECONV) gap <= 2'd3;
            if (fm_rd_en && !is_pw) rd_addr <= rd_addr + 1'b1;
            out_addr <= out_addr + 1'b1;
            if (x == xlim) begin
              x <= '0;
              y <= y + 1'b1;
              if (is_pw) begin
                row_base <= row_base + (cfg.stride2 ? FM_AW'({cfg.w, 1'b0}) : FM_AW'(cfg.w));
                rd_addr  <= row_base + (cfg.stride2 ? FM_AW'({cfg.w, 1'b0}) : FM_AW'(cfg.w));
              end
            end else begin
              x <= x + 1'b1;
              if (is_pw) rd_addr <= rd_addr + (cfg.stride2 ? FM_AW'(2) : FM_AW'(1));
            end
            if (last) begin
              wait_cnt <= 6'(DRAIN);
              state    <= S_DRAIN;
            end
          end
        end
        S_DRAIN: begin
          wait_cnt <= wait_cnt - 1'b1;
          if (wait_cnt == 6'd1) begin
            ops_done <= ops_done + 1'b1;
            state    <= S_IDLE;
          end
        end
        S_DMA: if (dma_done) begin
          ops_done <= ops_done + 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   desc_valid && desc_ready |-> desc.op inside {OP_PW, OP_DW, OP_DECONV,
                                                 OP_LOAD_FM, OP_STORE_FM, OP_LOAD_W})
    else $error("unknown operation");
endmodule
