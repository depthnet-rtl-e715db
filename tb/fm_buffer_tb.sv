// fm_buffer_tb: fills a full-size feature-map buffer (4864 words of 512
// bits) with a pattern, reads every word back and checks the data, the
// one-cycle read latency, that rd_data holds while rd_en is low, and
// read-old-data on a same-address read/write.
//
// Provenance: buffer size is the paper's; the test is generic RAM checking.
module fm_buffer_tb;
  localparam int DEPTH = 4864, WIDTH = 512, AW = 13;
  logic clk = 0;
  logic rd_en = 0, wr_en = 0;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [WIDTH-1:0] rd_data, wr_data = '0;
  int checks = 0, failures = 0;

  fm_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] pat(int a, int salt);
    logic [WIDTH-1:0] v;
    for (int k = 0; k < WIDTH / 32; k++) v[k*32 +: 32] = 32'(a * 2654435761 + k * 40503 + salt);
    return v;
  endfunction

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = AW'(a); wr_data = pat(a, 1);
      @(negedge clk);
    end
    wr_en = 0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = 1; rd_addr = AW'((a * 37) % DEPTH);
      @(negedge clk);
      checks++;
      if (rd_data != pat((a * 37) % DEPTH, 1)) begin
        failures++;
        if (failures < 5) $display("addr %0d mismatch", (a * 37) % DEPTH);
      end
    end
    // hold while rd_en low
    rd_en = 0; rd_addr = 13'd5;
    @(negedge clk);
    checks++;
    if (rd_data != pat(((DEPTH - 1) * 37) % DEPTH, 1)) failures++;
    // same-address read and write: old data returned, new data stored
    rd_en = 1; rd_addr = 13'd100; wr_en = 1; wr_addr = 13'd100; wr_data = pat(100, 7);
    @(negedge clk);
    wr_en = 0;
    checks++;
    if (rd_data != pat(100, 1)) failures++;
    @(negedge clk);
    checks++;
    if (rd_data != pat(100, 7)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
