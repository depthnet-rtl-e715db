// dw_conv_tb: random 3x3 windows and kernels for all channels, streamed
// back to back; each output is compared with the per-channel sum of nine
// products computed here.  Checks the 2-cycle latency and throughput.
//
// Provenance: reference is a plain 3x3 multiply-accumulate per channel;
// rates and latencies checked are this design's own.
module dw_conv_tb;
  localparam int LANES = 32, DW = 16, ACCW = 32, TAGW = 16;
  localparam int NWIN = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic signed [LANES-1:0][8:0][DW-1:0] win, kern;
  logic signed [LANES-1:0][ACCW-1:0] out_sum;
  logic [TAGW-1:0] in_tag, out_tag;
  int checks = 0, failures = 0;
  int cyc = 0, first_in = -1, first_out = -1, nout = 0;
  logic signed [LANES-1:0][ACCW-1:0] exp_q [$];
  logic [TAGW-1:0] tag_q [$];

  dw_conv #(.LANES(LANES), .DW(DW), .ACCW(ACCW), .TAGW(TAGW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    logic signed [LANES-1:0][ACCW-1:0] e;
    logic [TAGW-1:0] t;
    if (first_out < 0) first_out = cyc;
    nout++;
    e = exp_q.pop_front();
    t = tag_q.pop_front();
    for (int c = 0; c < LANES; c++) begin
      checks++;
      if (out_sum[c] != e[c]) begin
        failures++;
        if (failures < 10) $display("ch %0d got %0d exp %0d", c, out_sum[c], e[c]);
      end
    end
    checks++;
    if (out_tag != t) failures++;
  end

  initial begin
    in_valid = 0; win = '0; kern = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < NWIN; p++) begin
      logic signed [LANES-1:0][ACCW-1:0] e;
      for (int c = 0; c < LANES; c++)
        for (int t = 0; t < 9; t++) begin
          win[c][t] = DW'($urandom);
          if (p % 10 == 0) kern[c][t] = DW'($urandom);
        end
      for (int c = 0; c < LANES; c++) begin
        longint s;
        s = 0;
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++)
            s += longint'($signed(win[c][ky*3+kx])) * longint'($signed(kern[c][ky*3+kx]));
        e[c] = ACCW'(s);
      end
      in_tag = TAGW'(p * 7);
      exp_q.push_back(e);
      tag_q.push_back(in_tag);
      in_valid = 1;
      if (first_in < 0) first_in = cyc;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (nout != NWIN) failures++;
    checks++;
    if (first_out - first_in != 2) begin failures++; $display("latency %0d", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
