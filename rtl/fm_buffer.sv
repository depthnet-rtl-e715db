// fm_buffer: one on-chip feature-map buffer.
//
// The accelerator keeps ten low-precision buffers, each holding a 152 x 32
// pixel tile of one 32-channel group (4864 words of 32 x 16 bit), and one
// high-precision buffer of the same depth with 32-bit channels that holds
// pointwise partial sums.  This module is one such buffer: a simple
// dual-port RAM with one read and one write port.  rd_data is registered,
// valid one cycle after rd_en, and holds its value while rd_en is low.
// Reading and writing the same address in one cycle returns the old word.
//
// Provenance: size 152x32 pixels x 32 channels per buffer is the paper's;
// the 16-bit channel word, port structure and read latency are this
// design's own choices.
module fm_buffer #(
  parameter int unsigned DEPTH = 4864,
  parameter int unsigned WIDTH = 512,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
