// dw_deconv_tb: deconvolves random H x W maps (all 32 channels) by
// feeding the 2x2 patches of the top/left zero-padded map and assembling
// the 2H x 2W result.  The reference is the naive method: insert zeros
// between the input pixels, pad, and run a plain 3x3 convolution over the
// (2H+2) x (2W+2) map.  Also checks one patch per 4 cycles, four outputs
// per patch and a 2-cycle latency to the first output.
//
// Provenance: reference outputs are the paper's equations (1)-(4), worked
// out independently in the testbench; the output order is this design's.
module dw_deconv_tb;
  localparam int LANES = 32, DW = 16, ACCW = 32, TAGW = 16;
  localparam int H = 3, W = 5, NMAP = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid;
  logic [1:0] out_sub;
  logic signed [LANES-1:0][3:0][DW-1:0] patch;
  logic signed [LANES-1:0][8:0][DW-1:0] kern;
  logic signed [LANES-1:0][ACCW-1:0] out_sum;
  logic [TAGW-1:0] in_tag, out_tag;
  int checks = 0, failures = 0;
  int cyc = 0, first_in = -1, first_out = -1, nout = 0, last_acc = -1, gap_bad = 0;

  int fmap [LANES][H][W];
  int got  [LANES][2*H][2*W];
  int hits [2*H][2*W];

  dw_deconv #(.LANES(LANES), .DW(DW), .ACCW(ACCW), .TAGW(TAGW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int px(int c, int r, int q);
    if (r < 0 || q < 0) return 0;
    return fmap[c][r][q];
  endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    int r, q, oy, ox;
    if (first_out < 0) first_out = cyc;
    nout++;
    r  = int'(out_tag[15:8]);
    q  = int'(out_tag[7:0]);
    oy = 2 * r + int'(out_sub[1]);
    ox = 2 * q + int'(out_sub[0]);
    hits[oy][ox]++;
    for (int c = 0; c < LANES; c++) got[c][oy][ox] = int'($signed(out_sum[c]));
  end

  // accept spacing
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    if (last_acc >= 0 && cyc - last_acc < 4) gap_bad++;
    last_acc = cyc;
  end

  initial begin
    in_valid = 0; patch = '0; kern = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < NMAP; m++) begin
      for (int c = 0; c < LANES; c++) begin
        for (int t = 0; t < 9; t++) kern[c][t] = DW'($urandom_range(0, 4000) - 2000);
        for (int r = 0; r < H; r++)
          for (int q = 0; q < W; q++) fmap[c][r][q] = $urandom_range(0, 4000) - 2000;
      end
      foreach (hits[i, j]) hits[i][j] = 0;
      nout = 0;
      @(negedge clk);
      for (int r = 0; r < H; r++)
        for (int q = 0; q < W; q++) begin
          for (int c = 0; c < LANES; c++) begin
            patch[c][0] = DW'(px(c, r - 1, q - 1));
            patch[c][1] = DW'(px(c, r - 1, q));
            patch[c][2] = DW'(px(c, r, q - 1));
            patch[c][3] = DW'(px(c, r, q));
          end
          in_tag = TAGW'({8'(r), 8'(q)});
          in_valid = 1;
          if (first_in < 0) first_in = cyc;
          @(posedge clk);
          while (!in_ready) @(posedge clk);  // in_ready sampled at this edge's old value
          @(negedge clk);
        end
      in_valid = 0;
      repeat (10) @(negedge clk);
      // reference: zero-inserted, padded map convolved with the 3x3 kernel
      for (int c = 0; c < LANES; c++)
        for (int y = 0; y < 2 * H; y++)
          for (int x = 0; x < 2 * W; x++) begin
            int s;
            s = 0;
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                int py, pxx;
                py = y + ky; pxx = x + kx;   // padded coordinates, input at (2+2i, 2+2j)
                if (py >= 2 && pxx >= 2 && py % 2 == 0 && pxx % 2 == 0 &&
                    (py - 2) / 2 < H && (pxx - 2) / 2 < W)
                  s += fmap[c][(py - 2) / 2][(pxx - 2) / 2] * int'($signed(kern[c][ky*3+kx]));
              end
            checks++;
            if (got[c][y][x] != s) begin
              failures++;
              if (failures < 10) $display("map %0d ch %0d (%0d,%0d) got %0d exp %0d", m, c, y, x, got[c][y][x], s);
            end
          end
      foreach (hits[i, j]) begin
        checks++;
        if (hits[i][j] != 1) failures++;
      end
      checks++;
      if (nout != 4 * H * W) failures++;
    end
    checks++;
    if (first_out - first_in != 2) begin failures++; $display("latency %0d", first_out - first_in); end
    checks++;
    if (gap_bad != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
