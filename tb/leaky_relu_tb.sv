// leaky_relu_tb: checks LeakyReLU on random and edge values against a
// real-valued reference floor(0.2002*x) for negative x, identity otherwise,
// and the bypass (en = 0).  Combinational block: no latency to check.
//
// Provenance: the reference is the paper's LeakyReLU with slope 0.2, in
// this design's fixed-point form (x*205 >> 10).
module leaky_relu_tb;
  localparam int LANES = 32, DW = 16;
  logic en;
  logic signed [LANES-1:0][DW-1:0] x, y;
  int checks = 0, failures = 0;

  leaky_relu #(.LANES(LANES), .DW(DW)) dut (.en, .x, .y);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_act(int v, bit e);
    if (!e || v >= 0) return v;
    return int'($floor(real'(v) * 205.0 / 1024.0));
  endfunction

  initial begin
    int neg = 0;
    for (int it = 0; it < 200; it++) begin
      en = (it % 4) != 3;
      for (int l = 0; l < LANES; l++) begin
        if (it == 0) x[l] = (l == 0) ? 16'sh8000 : (l == 1) ? 16'sh7fff : (l == 2) ? -16'sd1 : 16'sd0;
        else         x[l] = DW'($urandom);
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        int e;
        e = ref_act(int'($signed(x[l])), en);
        checks++;
        if (int'($signed(y[l])) != e) begin
          failures++;
          if (failures < 10) $display("lane %0d x=%0d en=%0b y=%0d exp=%0d", l, x[l], en, y[l], e);
        end
        if (en && $signed(x[l]) < 0) neg++;
      end
      #1;
    end
    checks++;
    if (neg == 0) failures++;   // negative slope path exercised
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
