// weight_buffer: banked on-chip store for weights, kernels or biases.
//
// NBANK banks of DEPTH words, WIDTH bits each.  The DMA writes one word
// per cycle into one bank; the process engine reads the same address of
// every bank at once, so one read delivers a complete parameter set:
//   pointwise weights : 32 banks, bank o = the 32 weights of output lane o;
//   depthwise kernels : 9 banks, bank t = tap t of all 32 channels;
//   biases            : 1 bank, 32 biases.
// Read data is registered (one cycle).  The bank organisation and depths
// are this design's choice; together the three instances hold about half
// of the network's parameters, as the accelerator description asks.
module weight_buffer #(
  parameter int unsigned NBANK = 32,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 512,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned BW    = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [BW-1:0]               wr_bank,
  input  logic [AW-1:0]               wr_addr,
  input  logic [WIDTH-1:0]            wr_data,
  input  logic [AW-1:0]               rd_addr,
  output logic [NBANK-1:0][WIDTH-1:0] rd_data
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == BW'(b)) mem[wr_addr] <= wr_data;
      rd_data[b] <= mem[rd_addr];
    end
  end
endmodule
