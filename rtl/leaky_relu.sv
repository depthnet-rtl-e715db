// leaky_relu: LeakyReLU activation on all lanes of one pixel word,
//   y = 0.2*min(x,0) + max(x,0).
// The slope 0.2 of the accelerator description is realised as
// x*205/1024 (0.2002) with an arithmetic right shift, which rounds toward
// minus infinity.  'en' = 0 passes the pixel unchanged (for layers that
// have no activation); the bypass is this design's own addition.
// Purely combinational.
module leaky_relu #(
  parameter int unsigned LANES = 32,
  parameter int unsigned DW    = 16
) (
  input  logic                        en,
  input  logic signed [LANES-1:0][DW-1:0] x,
  output logic signed [LANES-1:0][DW-1:0] y
);
  localparam int signed SLOPE_NUM = 205;   // 205/1024 ~= 0.2
  localparam int unsigned SLOPE_SH = 10;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [DW+9:0] prod;
      prod = $signed(x[l]) * $signed(11'(SLOPE_NUM));
      if (en && x[l][DW-1]) y[l] = DW'(prod >>> SLOPE_SH);
      else                  y[l] = x[l];
    end
  end
endmodule
