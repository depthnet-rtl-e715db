// pw_conv_tb: streams random pixels, weight matrices and partial sums
// through pw_conv back to back and compares every lane with
// acc_init + sum(pixel*weight) computed in the testbench.  Also checks the
// 3-cycle latency and one-pixel-per-cycle throughput.
//
// Provenance: 32x32 multipliers per cycle follow the paper; the reference
// is a plain matrix-vector product plus accumulator input.
module pw_conv_tb;
  localparam int LANES = 32, NIN = 32, DW = 16, ACCW = 32, TAGW = 16;
  localparam int NPIX = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic signed [NIN-1:0][DW-1:0] in_pix;
  logic signed [LANES-1:0][NIN-1:0][DW-1:0] weights;
  logic signed [LANES-1:0][ACCW-1:0] acc_init, out_acc;
  logic [TAGW-1:0] in_tag, out_tag;
  int checks = 0, failures = 0;
  int cyc = 0, first_in = -1, first_out = -1, nout = 0;
  logic signed [LANES-1:0][ACCW-1:0] exp_q [$];
  logic [TAGW-1:0] tag_q [$];

  pw_conv #(.LANES(LANES), .NIN(NIN), .DW(DW), .ACCW(ACCW), .TAGW(TAGW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard
  always @(negedge clk) if (rst_n && out_valid) begin
    logic signed [LANES-1:0][ACCW-1:0] e;
    logic [TAGW-1:0] t;
    if (first_out < 0) first_out = cyc;
    nout++;
    e = exp_q.pop_front();
    t = tag_q.pop_front();
    for (int o = 0; o < LANES; o++) begin
      checks++;
      if (out_acc[o] != e[o]) begin
        failures++;
        if (failures < 10) $display("lane %0d got %0d exp %0d", o, out_acc[o], e[o]);
      end
    end
    checks++;
    if (out_tag != t) failures++;
  end

  initial begin
    in_valid = 0; in_pix = '0; weights = '0; acc_init = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < NPIX; p++) begin
      logic signed [LANES-1:0][ACCW-1:0] e;
      for (int i = 0; i < NIN; i++) in_pix[i] = DW'($urandom);
      if (p % 8 == 0)
        for (int o = 0; o < LANES; o++)
          for (int i = 0; i < NIN; i++) weights[o][i] = DW'($urandom);
      for (int o = 0; o < LANES; o++) acc_init[o] = (p % 2) ? ACCW'($urandom) : '0;
      in_tag = TAGW'(p);
      for (int o = 0; o < LANES; o++) begin
        longint s;
        s = longint'($signed(acc_init[o]));
        for (int i = 0; i < NIN; i++) s += longint'($signed(in_pix[i])) * longint'($signed(weights[o][i]));
        e[o] = ACCW'(s);
      end
      exp_q.push_back(e);
      tag_q.push_back(in_tag);
      in_valid = 1;
      if (first_in < 0) first_in = cyc;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (8) @(posedge clk);
    checks++;
    if (nout != NPIX) begin failures++; $display("outputs %0d", nout); end
    checks++;
    if (first_out - first_in != 3) begin failures++; $display("latency %0d", first_out - first_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
