// vdr_iexp: integer exponential of one max-subtracted logit, x_sub <= 0.
//
// Range reduction without a divider: Q = floor(-x_sub / l), clipped to QMAX =
// 2*Q_I, is found by comparing -x_sub against the multiples l, 2l, ..., QMAX*l
// in parallel (a thermometer code whose ones are counted). The remainder
// r = x_sub + Q*l lies in (-l, 0]. The polynomial (vdr_ipoly) approximates
// e^r and the result is shifted right by Q, i.e. multiplied by 2^-Q = e^(-Q*l).
// Inputs below -QMAX*l are clipped to -QMAX*l first.
//
// Steps, clip bound 2*Q_I and the polynomial follow the paper's VDR-Softmax
// algorithm. Two departures: the algorithm writes r = x_sub - Q - l, read here
// as r = x_sub + Q*l (the usual range reduction), and it writes
// r_EXP = r_POLY << Q, S_EXP = S_POLY >> Q; here r_EXP = r_POLY >> Q so that
// the token's values share one scale S_POLY, which is what makes the later
// eMSB-Q normalisation proportional. The comparator ladder replacing the
// division is this design's choice. Purely combinational.
module vdr_iexp
  import flare_pkg::*;
#(
  parameter int unsigned Q_I = 9,
  parameter int unsigned XW  = Q_I + 1
) (
  input  logic signed [XW-1:0]          x_sub_i,
  input  vdr_param_t                    p_i,
  output logic [EXP_W-1:0]              r_exp_o,
  output logic [LUT_A_W+LUT_S_W-1:0]    s_poly_o
);
  localparam int unsigned QMAX = 2 * Q_I;
  localparam int unsigned RW   = XW + 1;

  logic signed [31:0] xc;
  logic [5:0]         q;
  logic signed [RW-1:0] r;
  logic [EXP_W-1:0]   x_poly;

  always_comb begin
    logic signed [31:0] lo;
    lo = -$signed(32'(QMAX) * 32'(p_i.l));
    xc = (32'(x_sub_i) < lo) ? lo : 32'(x_sub_i);
    q  = '0;
    for (int unsigned k = 1; k <= QMAX; k++)
      if ($signed(32'(k) * 32'(p_i.l)) <= -xc) q = q + 1'b1;
    r = RW'(xc + $signed(32'(q) * 32'(p_i.l)));
  end

  vdr_ipoly #(.RW(RW)) u_poly (
    .r_i     (r),
    .p_i     (p_i),
    .x_poly_o(x_poly),
    .s_poly_o(s_poly_o)
  );

  assign r_exp_o = x_poly >> q;
endmodule
