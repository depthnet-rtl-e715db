// dispatcher_tb: scans random maps into the dispatcher the way the
// controller does ((H+1) x (W+1) positions, zeros for the extra row and
// column) and checks
//   * DW stride 1: one window per map pixel, equal to the 3x3 neighbourhood
//     of the zero-padded map;
//   * DW stride 2: windows only at even rows and columns;
//   * DECONV: one 2x2 patch per pixel, equal to the top/left padded patch;
//   * PW: the pixel, partial sum and address pass straight through.
//
// Provenance: window and patch positions are checked against a direct
// image-indexing model; the scan format is this design's own.
module dispatcher_tb;
  import depthnet_pkg::*;
  localparam int NL = 2, MW = 16;
  logic clk = 0, rst_n = 0;
  op_e op;
  logic stride2, start, in_valid;
  logic [DIMW-1:0] w;
  logic signed [NL-1:0][DW-1:0] in_pix;
  logic signed [NL-1:0][ACCW-1:0] in_init;
  logic [FM_AW-1:0] in_addr;
  logic pw_valid, dw_valid, dc_valid;
  logic signed [NL-1:0][DW-1:0] pw_pix;
  logic signed [NL-1:0][ACCW-1:0] pw_init;
  logic [FM_AW-1:0] pw_addr;
  logic signed [NL-1:0][8:0][DW-1:0] win;
  logic signed [NL-1:0][3:0][DW-1:0] patch;
  logic [DIMW-1:0] win_y, win_x;
  int checks = 0, failures = 0;
  int H, W;
  int fmap [NL][16][16];
  int nwin, ndc;

  dispatcher #(.LANES(NL), .MAX_W(MW)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int px(int c, int r, int q);
    if (r < 0 || q < 0 || r >= H || q >= W) return 0;
    return fmap[c][r][q];
  endfunction

  always @(negedge clk) if (rst_n) begin
    if (dw_valid) begin
      nwin++;
      if (stride2 && (win_y[0] || win_x[0])) failures++;
      for (int c = 0; c < NL; c++)
        for (int t = 0; t < 9; t++) begin
          checks++;
          if (int'($signed(win[c][t])) != px(c, int'(win_y) - 1 + t / 3, int'(win_x) - 1 + t % 3)) failures++;
        end
    end
    if (dc_valid) begin
      ndc++;
      for (int c = 0; c < NL; c++) begin
        checks += 4;
        if (int'($signed(patch[c][0])) != px(c, int'(win_y) - 1, int'(win_x) - 1)) failures++;
        if (int'($signed(patch[c][1])) != px(c, int'(win_y) - 1, int'(win_x))) failures++;
        if (int'($signed(patch[c][2])) != px(c, int'(win_y), int'(win_x) - 1)) failures++;
        if (int'($signed(patch[c][3])) != px(c, int'(win_y), int'(win_x))) failures++;
      end
    end
  end

  task automatic scan(input op_e o, input bit s2, input int hh, input int ww);
    H = hh; W = ww;
    for (int c = 0; c < NL; c++)
      for (int r = 0; r < 16; r++)
        for (int q = 0; q < 16; q++) fmap[c][r][q] = $urandom_range(0, 2000) - 1000;
    op = o; stride2 = s2; w = DIMW'(ww); nwin = 0; ndc = 0;
    start = 1; @(negedge clk); start = 0;
    for (int ys = 0; ys <= hh; ys++)
      for (int xs = 0; xs <= ww; xs++) begin
        in_valid = 1;
        for (int c = 0; c < NL; c++) in_pix[c] = DW'(px(c, ys, xs));
        @(negedge clk);
      end
    in_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    op = OP_DW; stride2 = 0; start = 0; in_valid = 0; w = '0;
    in_pix = '0; in_init = '0; in_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    scan(OP_DW, 0, 5, 7);
    checks++; if (nwin != 35) begin failures++; $display("s1 windows %0d", nwin); end
    scan(OP_DW, 1, 6, 8);
    checks++; if (nwin != 12) begin failures++; $display("s2 windows %0d", nwin); end
    scan(OP_DECONV, 0, 4, 3);
    checks++; if (ndc != 12 || nwin != 0) begin failures++; $display("dc patches %0d", ndc); end
    // pointwise pass-through
    op = OP_PW;
    for (int k = 0; k < 10; k++) begin
      in_valid = 1; in_pix = {NL{DW'($urandom)}}; in_init = {NL{ACCW'($urandom)}};
      in_addr = FM_AW'(k);
      #1;
      checks++;
      if (!pw_valid || pw_pix != in_pix || pw_init != in_init || pw_addr != in_addr ||
          dw_valid || dc_valid) failures++;
      @(negedge clk);
    end
    in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
