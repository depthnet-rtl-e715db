// window_gen: line-buffer 3x3 sliding-window generator.
//
// Pixels arrive in raster order over a scan of (h+1) x (w+1) positions:
// the h x w map itself plus one extra row and one extra column, for which
// the feeder supplies zeros (this is the bottom and right zero padding).
// Two line buffers keep the previous two scan rows, a 3x3 register holds
// the last three columns.  After scan position (ys, xs) the window centred
// on map pixel (ys-1, xs-1) is complete and is emitted, with the top row
// forced to zero on map row 0 and the left column forced to zero on map
// column 0 (top and left zero padding).  So every map pixel gets exactly
// one window, centred on it, with one-pixel zero padding all round.
//
// Interface: 'start' clears the scan counters (pulse before a new map).
// Window taps are win[c][ky*3+kx], tap 0 top-left.  out_y/out_x give the
// centre.  Timing: the window for a scan position leaves one cycle after
// the pixel that completes it.  MAX_W bounds w; h and w must stay constant
// during a scan.
//
// Provenance: not described in the paper; a conventional two-line-buffer
// window generator chosen for this design.
module window_gen #(
  parameter int unsigned LANES = 32,
  parameter int unsigned DW    = 16,
  parameter int unsigned DIMW  = 11,
  parameter int unsigned MAX_W = 1216
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [DIMW-1:0]                   w,
  input  logic                              in_valid,
  input  logic signed [LANES-1:0][DW-1:0]   in_pix,
  output logic                              out_valid,
  output logic [DIMW-1:0]                   out_y,
  output logic [DIMW-1:0]                   out_x,
  output logic signed [LANES-1:0][8:0][DW-1:0] win
);
  typedef logic signed [LANES-1:0][DW-1:0] pix_t;

  pix_t lb0 [MAX_W+1];   // scan row ys-2
  pix_t lb1 [MAX_W+1];   // scan row ys-1
  pix_t col [3][3];      // col[j][r]: j = 0 left .. 2 right, r = 0 top .. 2 bottom
  logic [DIMW-1:0] xs, ys;
  pix_t up2, up1;

  assign up2 = lb0[xs];
  assign up1 = lb1[xs];

  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb0[xs] <= up1;
      lb1[xs] <= in_pix;
      col[0]  <= col[1];
      col[1]  <= col[2];
      col[2]  <= '{up2, up1, in_pix};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs <= '0; ys <= '0;
      out_valid <= 1'b0; out_y <= '0; out_x <= '0;
    end else begin
      out_valid <= in_valid && (ys != '0) && (xs != '0);
      if (in_valid) begin
        out_y <= ys - 1'b1;
        out_x <= xs - 1'b1;
      end
      if (start) begin
        xs <= '0; ys <= '0;
      end else if (in_valid) begin
        if (xs == w) begin
          xs <= '0;
          ys <= ys + 1'b1;
        end else begin
          xs <= xs + 1'b1;
        end
      end
    end
  end

  // padding masks on the emitted window
  always_comb begin
    for (int c = 0; c < LANES; c++)
      for (int r = 0; r < 3; r++)
        for (int j = 0; j < 3; j++)
          win[c][r*3+j] = ((r == 0 && out_y == '0) || (j == 0 && out_x == '0))
                          ? '0 : col[j][r][c];
  end
endmodule
