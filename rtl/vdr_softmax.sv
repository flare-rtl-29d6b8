// vdr_softmax: VDR-Softmax over the N logits of one token and head, integer
// only, fused with eMSB-Q.
//
// Stage 1 registers the logits and the table entry for the token's exponent
// n_e (read from vdr_lut outside through `ne_o`/`param_i`). Stage 2 finds the
// maximum, subtracts it, and runs N vdr_iexp lanes in parallel. Stage 3 applies
// eMSB-Q to the N exponentials: the largest lands on the top of the
// QO_W-bit output range and the rest keep their ratios to it. The output is
// proportional to softmax (normalised by a power of two, not by the sum), as
// the paper describes: no division is made anywhere.
//
// Follows the paper: per-token n_e selecting the parameters, max subtraction,
// iEXP with 2nd-order polynomial, eMSB-Q normalisation. This design's choices:
// N parallel lanes, the three-stage pipeline, an unsigned-range output of
// QO_W-1 magnitude bits (QO_W-bit signed container, sign always 0).
//
// Timing: `start_i` with `x_i` and `ne_i` at cycle t; `valid_o` with `s_o`,
// `s_exp_o` (scale a*S of the exponentials) and `shift_o` (eMSB-Q shift) at
// cycle t+3, for one cycle. A new token can start every cycle.
module vdr_softmax
  import flare_pkg::*;
#(
  parameter int unsigned N    = 512,
  parameter int unsigned Q_I  = 9,
  parameter int unsigned QO_W = 9,
  parameter int unsigned NE_W = 6
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start_i,
  input  logic [N-1:0][Q_I-1:0]             x_i,
  input  logic [NE_W-1:0]                   ne_i,
  output logic [NE_W-1:0]                   ne_o,
  input  vdr_param_t                        param_i,
  output logic                              valid_o,
  output logic [N-1:0][QO_W-1:0]            s_o,
  output logic [LUT_A_W+LUT_S_W-1:0]        s_exp_o,
  output logic [$clog2(EXP_W+2)-1:0]        shift_o
);
  localparam int unsigned XW = Q_I + 1;
  localparam int unsigned SHW = $clog2(EXP_W+2);

  // stage 1
  logic                   v1;
  logic [N-1:0][Q_I-1:0]  x1;
  vdr_param_t             p1;
  // stage 2
  logic                   v2;
  logic [N-1:0][EXP_W+1-1:0] e2;   // exponentials with a zero sign bit
  logic [LUT_A_W+LUT_S_W-1:0] sp2;
  logic [N-1:0][EXP_W-1:0] e_comb;
  logic [N-1:0][LUT_A_W+LUT_S_W-1:0] sp_comb;
  logic signed [Q_I-1:0]  xmax;
  // stage 3
  logic [N-1:0][QO_W-1:0] q_comb;
  logic [SHW-1:0]         sh_comb;

  assign ne_o = ne_i;

  always_comb begin
    xmax = $signed(x1[0]);
    for (int unsigned i = 1; i < N; i++)
      if ($signed(x1[i]) > xmax) xmax = $signed(x1[i]);
  end

  for (genvar i = 0; i < N; i++) begin : g_lane
    logic signed [XW-1:0] xs;
    assign xs = XW'($signed(x1[i])) - XW'(xmax);
    vdr_iexp #(.Q_I(Q_I), .XW(XW)) u_exp (
      .x_sub_i (xs),
      .p_i     (p1),
      .r_exp_o (e_comb[i]),
      .s_poly_o(sp_comb[i])
    );
  end

  emsb_q #(.N(N), .IN_W(EXP_W+1), .OUT_W(QO_W)) u_norm (
    .x_i          (e2),
    .mode_i       (EMSBQ_AUTO),
    .fixed_shift_i('0),
    .q_o          (q_comb),
    .shift_o      (sh_comb)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; valid_o <= 1'b0;
      x1 <= '0; p1 <= '0; e2 <= '0; sp2 <= '0;
      s_o <= '0; s_exp_o <= '0; shift_o <= '0;
    end else begin
      v1 <= start_i;
      if (start_i) begin
        x1 <= x_i;
        p1 <= param_i;
      end
      v2 <= v1;
      if (v1) begin
        for (int unsigned i = 0; i < N; i++) e2[i] <= {1'b0, e_comb[i]};
        sp2 <= sp_comb[0];
      end
      valid_o <= v2;
      if (v2) begin
        s_o     <= q_comb;
        s_exp_o <= sp2;
        shift_o <= sh_comb;
      end
    end
  end
endmodule
