// process_engine_tb: drives the process engine directly with scan streams
// like the controller's and checks every buffer write against
// depthnet_ref_pkg:
//   DW s1 + bias + LeakyReLU (5x7), DW s2 + bias (6x8),
//   PW non-final (partial sums to the high-precision port),
//   PW final with acc_init + bias + LeakyReLU,
//   DECONV + bias (3x4 -> 6x8, one scan item per 4 cycles).
// Write counts per pass and the destination addresses are checked too.
//
// Provenance: operation types are the paper's; reference values come from
// the same fixed-point model as the end-to-end test.
module process_engine_tb;
  import depthnet_pkg::*;
  import depthnet_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  desc_t cfg;
  logic start, in_valid;
  logic signed [L-1:0][DW-1:0] in_pix;
  logic signed [L-1:0][ACCW-1:0] in_init;
  logic [FM_AW-1:0] in_addr;
  logic signed [L-1:0][L-1:0][DW-1:0] pw_w;
  logic signed [L-1:0][8:0][DW-1:0] dw_k;
  logic signed [L-1:0][DW-1:0] bias;
  logic wr_valid, wr_hp, dc_busy;
  logic [FM_AW-1:0] wr_addr;
  logic signed [L-1:0][DW-1:0] wr_lp;
  logic signed [L-1:0][ACCW-1:0] wr_hpdata;
  int checks = 0, failures = 0;
  int nwr, nhp;

  process_engine #(.NL(L), .WMAX_W(64)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fmap_t src, got, exp_m;
  accmap_t hp_got, zero_acc, acc_exp;
  kern_t k;
  wmat_t wm;
  bias_t b;

  always @(negedge clk) if (rst_n && wr_valid) begin
    if (wr_hp) begin
      nhp++;
      for (int c = 0; c < L; c++) hp_got[c][wr_addr] = longint'($signed(wr_hpdata[c]));
    end else begin
      nwr++;
      for (int c = 0; c < L; c++) got[c][wr_addr] = int'($signed(wr_lp[c]));
    end
  end

  task automatic randomize_params();
    for (int c = 0; c < L; c++) begin
      for (int t = 0; t < 9; t++) begin k[c][t] = $urandom_range(0, 256) - 128; dw_k[c][t] = DW'(k[c][t]); end
      for (int i = 0; i < L; i++) begin wm[c][i] = $urandom_range(0, 64) - 32; pw_w[c][i] = DW'(wm[c][i]); end
      b[c] = $urandom_range(0, 512) - 256; bias[c] = DW'(b[c]);
    end
  endtask

  task automatic new_src(int n);
    for (int c = 0; c < L; c++) for (int p = 0; p < n; p++) src[c][p] = $urandom_range(0, 2048) - 1024;
  endtask

  // (h+1) x (w+1) scan with zeros outside the map; 'gap' idle cycles after each item
  task automatic scan_win(int h, int w, int gap);
    start = 1; @(negedge clk); start = 0;
    for (int y = 0; y <= h; y++)
      for (int x = 0; x <= w; x++) begin
        in_valid = 1;
        for (int c = 0; c < L; c++) in_pix[c] = (y < h && x < w) ? DW'(src[c][y * w + x]) : '0;
        @(negedge clk);
        in_valid = 0;
        repeat (gap) @(negedge clk);
      end
    in_valid = 0;
    repeat (12) @(negedge clk);
  endtask

  task automatic scan_pw(int h, int w, bit s2, bit use_init);
    int st, ho, wo;
    st = s2 ? 2 : 1; ho = h / st; wo = w / st;
    start = 1; @(negedge clk); start = 0;
    for (int y = 0; y < ho; y++)
      for (int x = 0; x < wo; x++) begin
        in_valid = 1;
        in_addr = FM_AW'(y * wo + x);
        for (int c = 0; c < L; c++) begin
          in_pix[c]  = DW'(src[c][(y * st) * w + x * st]);
          in_init[c] = use_init ? ACCW'(hp_got[c][y * wo + x]) : ACCW'($urandom);
        end
        @(negedge clk);
      end
    in_valid = 0;
    repeat (12) @(negedge clk);
  endtask

  task automatic compare(string name, int n, int nexp);
    int bad;
    bad = 0;
    checks++;
    if (nwr != nexp) begin failures++; $display("%s: %0d writes, expected %0d", name, nwr, nexp); end
    for (int c = 0; c < L; c++)
      for (int p = 0; p < n; p++) begin
        checks++;
        if (got[c][p] != exp_m[c][p]) begin
          failures++; bad++;
          if (bad < 4) $display("%s ch %0d px %0d got %0d exp %0d", name, c, p, got[c][p], exp_m[c][p]);
        end
      end
  endtask

  initial begin
    cfg = '0; start = 0; in_valid = 0; in_pix = '0; in_init = '0; in_addr = '0;
    pw_w = '0; dw_k = '0; bias = '0;
    for (int c = 0; c < L; c++) for (int p = 0; p < D; p++) zero_acc[c][p] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // DW stride 1 + bias + act
    randomize_params(); new_src(35); nwr = 0;
    cfg = '0; cfg.op = OP_DW; cfg.h = 11'd5; cfg.w = 11'd7; cfg.final_op = 1; cfg.act_en = 1;
    scan_win(5, 7, 0);
    dw_ref(src, 5, 7, k, 0, b, 1, 1, exp_m);
    compare("dw s1", 35, 35);

    // DW stride 2 + bias
    randomize_params(); new_src(48); nwr = 0;
    cfg = '0; cfg.op = OP_DW; cfg.h = 11'd6; cfg.w = 11'd8; cfg.stride2 = 1; cfg.final_op = 1;
    scan_win(6, 8, 0);
    dw_ref(src, 6, 8, k, 1, b, 1, 0, exp_m);
    compare("dw s2", 12, 12);

    // PW partial sums to the high-precision port
    randomize_params(); new_src(20); nwr = 0; nhp = 0;
    cfg = '0; cfg.op = OP_PW; cfg.h = 11'd4; cfg.w = 11'd5;
    scan_pw(4, 5, 0, 0);
    pw_ref(src, 4, 5, wm, 0, zero_acc, acc_exp);
    checks++; if (nhp != 20 || nwr != 0) failures++;
    for (int c = 0; c < L; c++) for (int p = 0; p < 20; p++) begin
      checks++;
      if (hp_got[c][p] != acc_exp[c][p]) failures++;
    end
    // second PW pass (stride 2 over an 8x10 map) accumulating, final
    randomize_params(); new_src(80); nwr = 0; nhp = 0;
    cfg = '0; cfg.op = OP_PW; cfg.h = 11'd8; cfg.w = 11'd10; cfg.stride2 = 1; cfg.acc_in = 1;
    cfg.final_op = 1; cfg.act_en = 1;
    scan_pw(8, 10, 1, 1);
    begin
      accmap_t a2;
      pw_ref(src, 8, 10, wm, 1, acc_exp, a2);
      for (int c = 0; c < L; c++) for (int p = 0; p < 20; p++) exp_m[c][p] = post(a2[c][p], b[c], 1, 1);
    end
    compare("pw acc", 20, 20);

    // DECONV 3x4 -> 6x8
    randomize_params(); new_src(12); nwr = 0;
    cfg = '0; cfg.op = OP_DECONV; cfg.h = 11'd3; cfg.w = 11'd4; cfg.final_op = 1;
    scan_win(3, 4, 3);
    dc_ref(src, 3, 4, k, b, 1, 0, exp_m);
    compare("deconv", 48, 48);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
