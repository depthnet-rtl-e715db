// weight_buffer_tb: loads the pointwise-weight configuration (32 banks x
// 64 words) word by word through the write port, then reads each address
// and checks that every bank returns its own word one cycle later.  A
// second instance with 9 banks (depthwise kernels) is checked the same
// way.
//
// Provenance: the bank organisation tested is this design's own.
module weight_buffer_tb;
  localparam int WIDTH = 512;
  logic clk = 0;
  int checks = 0, failures = 0;

  // 32-bank instance
  logic we32 = 0; logic [4:0] wb32 = '0; logic [5:0] wa32 = '0, ra32 = '0;
  logic [WIDTH-1:0] wd32 = '0;
  logic [31:0][WIDTH-1:0] rd32;
  weight_buffer #(.NBANK(32), .DEPTH(64), .WIDTH(WIDTH)) dut32 (
    .clk, .wr_en(we32), .wr_bank(wb32), .wr_addr(wa32), .wr_data(wd32), .rd_addr(ra32), .rd_data(rd32));

  // 9-bank instance
  logic we9 = 0; logic [3:0] wb9 = '0; logic [4:0] wa9 = '0, ra9 = '0;
  logic [WIDTH-1:0] wd9 = '0;
  logic [8:0][WIDTH-1:0] rd9;
  weight_buffer #(.NBANK(9), .DEPTH(32), .WIDTH(WIDTH)) dut9 (
    .clk, .wr_en(we9), .wr_bank(wb9), .wr_addr(wa9), .wr_data(wd9), .rd_addr(ra9), .rd_data(rd9));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] pat(int b, int a);
    return {16{32'(b * 1000003 + a * 7919 + 12345)}};
  endfunction

  initial begin
    @(negedge clk);
    for (int a = 0; a < 64; a++)
      for (int b = 0; b < 32; b++) begin
        we32 = 1; wb32 = 5'(b); wa32 = 6'(a); wd32 = pat(b, a);
        if (a < 32 && b < 9) begin we9 = 1; wb9 = 4'(b); wa9 = 5'(a); wd9 = pat(b + 50, a); end
        else we9 = 0;
        @(negedge clk);
      end
    we32 = 0; we9 = 0;
    for (int a = 0; a < 64; a++) begin
      ra32 = 6'(63 - a); ra9 = 5'(a % 32);
      @(negedge clk);
      for (int b = 0; b < 32; b++) begin
        checks++;
        if (rd32[b] != pat(b, 63 - a)) failures++;
      end
      for (int b = 0; b < 9; b++) begin
        checks++;
        if (rd9[b] != pat(b + 50, a % 32)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
