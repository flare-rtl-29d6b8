// vdr_ipoly: the integer second-order polynomial of the VDR-Softmax,
// x_poly = r * (r + b) + c, with the scale product s_poly = a * S.
// r is the remainder of the exponent range reduction (-l < r <= 0); b and c
// come from the parameter table for the current exponent, so the same
// integer hardware evaluates e^x at any input scale. The form of the
// polynomial is the paper's; the result is kept in the 24-bit iEXP width and
// clamped at zero. Purely combinational.
module vdr_ipoly
  import flare_pkg::*;
#(
  parameter int unsigned RW = 10
) (
  input  logic signed [RW-1:0]     r_i,
  input  vdr_param_t               p_i,
  output logic [EXP_W-1:0]         x_poly_o,
  output logic [LUT_A_W+LUT_S_W-1:0] s_poly_o
);
  always_comb begin
    logic signed [47:0] t;
    t = 48'(r_i) * (48'(r_i) + 48'({1'b0, p_i.b})) + 48'({1'b0, p_i.c});
    if (t < 0)                          x_poly_o = '0;
    else if (t >= 48'(1) <<< EXP_W)     x_poly_o = '1;
    else                                x_poly_o = t[EXP_W-1:0];
    s_poly_o = p_i.a * p_i.s;
  end
endmodule
