// post_proc: output stage of the process engine for writes into a
// low-precision feature-map buffer.
//
// Per lane: v = acc + (bias << FRAC) when bias_en, then an arithmetic
// shift right by FRAC (products of two Q.FRAC numbers carry 2*FRAC
// fraction bits), saturation to DW bits and LeakyReLU when act_en.
// Combinational.  Where bias is added, and the rounding (truncation
// toward minus infinity), are this design's choices.
module post_proc
  import depthnet_pkg::*;
#(
  parameter int unsigned NL = 32
) (
  input  logic                              bias_en,
  input  logic                              act_en,
  input  logic signed [NL-1:0][ACCW-1:0]    acc,
  input  logic signed [NL-1:0][DW-1:0]      bias,
  output logic signed [NL-1:0][DW-1:0]      y
);
  logic signed [NL-1:0][DW-1:0] q;

  always_comb begin
    for (int l = 0; l < NL; l++) begin
      logic signed [ACCW+DW-1:0] v;
      v = (ACCW+DW)'($signed(acc[l]));
      if (bias_en) v = v + ((ACCW+DW)'($signed(bias[l])) <<< FRAC);
      q[l] = sat_dw(v >>> FRAC);
    end
  end

  leaky_relu #(.LANES(NL), .DW(DW)) u_act (.en(act_en), .x(q), .y(y));
endmodule
