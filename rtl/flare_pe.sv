// flare_pe: one FLARE processing element. It computes one multi-head
// self-attention layer end to end for a sequence of N tokens, with every
// weight and every intermediate tensor kept inside the PE.
//
// Contents: four MRAM-PiM GEMV engines holding W_Q, W_K, W_V and W_O (D x D
// 8-bit weights each), per head an SRAM-PiM K cache (d_k rows by N tokens) and
// an SRAM-PiM V cache (N rows by d_k), eMSB-Q quantisers after every
// projection, and the VDR-Softmax with its parameter table. All GEMV engines
// are BitSift engines (pim_gemv).
//
// Dataflow, two passes over the input sequence:
//  1. K/V pass. Each token x (D x 8 bit, signed) is projected by W_K and W_V
//     at once. K and V are requantised to 9 bits with the fixed, configured
//     shift `kv_shift_i` (they must share one scale over all tokens) and
//     written into the caches of every head: K as one column group, V as one
//     row.
//  2. Fused pass, token by token. x is streamed in again and projected by
//     W_Q; Q is requantised per token by eMSB-Q. Every head computes
//     L = Q_h K_h^T in its K cache at the same time; each head's N logits are
//     requantised per token, then, one head after the other, the VDR-Softmax
//     turns them into scores S_h using the exponent
//     n_e = x_ne + shift(Q) + shift(L_h). All heads then compute
//     A_h = S_h V_h in their V caches at the same time; the concatenated A is
//     requantised and projected by W_O; the result is requantised and sent
//     out with its exponent shift(A) + shift(O).
// Off-PE traffic is therefore the input read twice and the output once.
//
// Follows the paper: the two passes, the MRAM/SRAM split, per-token eMSB-Q of
// Q, L and the output, fixed-position parsing of K and V, eMSB-driven
// softmax, BitSift GEMVs. This design's choices: the handshakes, the cache
// layout (separate K and V arrays per head), heads run in parallel but share
// one softmax unit, 9-bit (Q+1) activations everywhere, the A requantisation
// step, and the output exponent convention.
//
// Interfaces: weights are loaded row by row (`w_sel_i` 0..3 = Q, K, V, O;
// row r holds W[r][0..D-1]); the softmax table through `lut_*`. `start_i`
// starts a layer; tokens are accepted on `tok_valid_i && tok_ready_o`, first
// all N for the K/V pass, then all N again; each output token is offered on
// `out_valid_o` until `out_ready_i`. `done_o` pulses after the N-th output.
module flare_pe
  import flare_pkg::*;
#(
  parameter int unsigned D     = 1024,
  parameter int unsigned N     = 512,
  parameter int unsigned H     = 16,
  parameter int unsigned DK    = D / H,
  parameter int unsigned WBP   = 8,
  parameter int unsigned XBP   = 8,
  parameter int unsigned ABP   = 9,
  parameter int unsigned ACC_W = 28,
  parameter int unsigned NE_W  = 6
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // configuration
  input  logic [$clog2(ACC_W+1)-1:0]        kv_shift_i,
  input  logic [NE_W-1:0]                   x_ne_i,
  input  logic                              w_we_i,
  input  logic [1:0]                        w_sel_i,
  input  logic [$clog2(D)-1:0]              w_row_i,
  input  logic [D*WBP-1:0]                  w_data_i,
  input  logic                              lut_we_i,
  input  logic [$clog2(LUT_ENTRIES)-1:0]    lut_addr_i,
  input  vdr_param_t                        lut_data_i,
  // control
  input  logic                              start_i,
  output logic                              busy_o,
  output logic                              done_o,
  // token stream in
  input  logic                              tok_valid_i,
  output logic                              tok_ready_o,
  input  logic [D-1:0][XBP-1:0]             tok_i,
  // token stream out
  output logic                              out_valid_o,
  input  logic                              out_ready_i,
  output logic [D-1:0][ABP-1:0]             out_o,
  output logic [NE_W-1:0]                   out_exp_o
);
  localparam int unsigned SW  = $clog2(ACC_W+1);
  localparam int unsigned SMW = $clog2(EXP_W+2);

  pe_state_e state_q;
  logic      kick_q;
  logic [$clog2(N)-1:0] t_q;
  logic [$clog2(H+1)-1:0] h_q;
  logic      sm_wait_q;

  logic [D-1:0][ABP-1:0] x_q, q_q, a_q;
  logic [H-1:0][N-1:0][ABP-1:0] s_buf;
  logic [SW-1:0] q_s_q, a_s_q;

  // ------------------------------------------------------------ A-W engines
  logic [3:0]                       aw_start, aw_done, aw_busy;
  logic [3:0][D-1:0][ACC_W-1:0]     aw_acc;
  logic [3:0][31:0]                 aw_fetches;
  logic [3:0][D-1:0][ABP-1:0]       aw_act;

  assign aw_act[0] = x_q;   // W_Q
  assign aw_act[1] = x_q;   // W_K
  assign aw_act[2] = x_q;   // W_V
  assign aw_act[3] = a_q;   // W_O

  assign aw_start[0] = kick_q && state_q == PE_Q_GEMV;
  assign aw_start[1] = kick_q && state_q == PE_KV_GEMV;
  assign aw_start[2] = kick_q && state_q == PE_KV_GEMV;
  assign aw_start[3] = kick_q && state_q == PE_O_GEMV;

  for (genvar m = 0; m < 4; m++) begin : g_aw
    pim_gemv #(.ROWS(D), .F(D), .GW(WBP), .ABP(ABP), .ACC_W(ACC_W)) u_gemv (
      .clk          (clk),
      .rst_n        (rst_n),
      .start_i      (aw_start[m]),
      .act_i        (aw_act[m]),
      .busy_o       (aw_busy[m]),
      .done_o       (aw_done[m]),
      .acc_o        (aw_acc[m]),
      .fetches_o    (aw_fetches[m]),
      .wr_row_en_i  (w_we_i && w_sel_i == 2'(m)),
      .wr_row_addr_i(w_row_i),
      .wr_row_data_i(w_data_i),
      .wr_col_en_i  (1'b0),
      .wr_col_grp_i ('0),
      .wr_col_data_i('0)
    );
  end

  // ------------------------------------------------------------ quantisers
  logic [D-1:0][ABP-1:0] kq, vq, qq, aq, oq;
  logic [SW-1:0]         kq_s, vq_s, qq_s, aq_s, oq_s;
  logic [D-1:0][ACC_W-1:0] a_cat;

  emsb_q #(.N(D), .IN_W(ACC_W), .OUT_W(ABP)) u_q_k (
    .x_i(aw_acc[1]), .mode_i(EMSBQ_FIXED), .fixed_shift_i(kv_shift_i), .q_o(kq), .shift_o(kq_s));
  emsb_q #(.N(D), .IN_W(ACC_W), .OUT_W(ABP)) u_q_v (
    .x_i(aw_acc[2]), .mode_i(EMSBQ_FIXED), .fixed_shift_i(kv_shift_i), .q_o(vq), .shift_o(vq_s));
  emsb_q #(.N(D), .IN_W(ACC_W), .OUT_W(ABP)) u_q_q (
    .x_i(aw_acc[0]), .mode_i(EMSBQ_AUTO), .fixed_shift_i('0), .q_o(qq), .shift_o(qq_s));
  emsb_q #(.N(D), .IN_W(ACC_W), .OUT_W(ABP)) u_q_a (
    .x_i(a_cat), .mode_i(EMSBQ_AUTO), .fixed_shift_i('0), .q_o(aq), .shift_o(aq_s));
  emsb_q #(.N(D), .IN_W(ACC_W), .OUT_W(ABP)) u_q_o (
    .x_i(aw_acc[3]), .mode_i(EMSBQ_AUTO), .fixed_shift_i('0), .q_o(oq), .shift_o(oq_s));

  // ------------------------------------------------------------ A-A engines
  logic [H-1:0]                    l_done, v_done, l_busy, v_busy;
  logic [H-1:0]                    l_fin_q, v_fin_q;
  logic [H-1:0][N-1:0][ACC_W-1:0]  l_acc;
  logic [H-1:0][DK-1:0][ACC_W-1:0] v_acc;
  logic [H-1:0][31:0]              l_fetches, v_fetches;

  for (genvar h = 0; h < H; h++) begin : g_head
    logic [DK-1:0][ABP-1:0]   k_col;
    logic [DK*ABP-1:0]        v_row;
    for (genvar r = 0; r < DK; r++) begin : g_kv
      assign k_col[r]               = kq[h*DK + r];
      assign v_row[r*ABP +: ABP]    = vq[h*DK + r];
      assign a_cat[h*DK + r]        = v_acc[h][r];
    end

    // K cache: rows = d_k, one column group per token; computes L = Q_h K_h^T.
    pim_gemv #(.ROWS(DK), .F(N), .GW(ABP), .ABP(ABP), .ACC_W(ACC_W)) u_k (
      .clk          (clk),
      .rst_n        (rst_n),
      .start_i      (kick_q && state_q == PE_L_GEMV),
      .act_i        (q_q[h*DK +: DK]),
      .busy_o       (l_busy[h]),
      .done_o       (l_done[h]),
      .acc_o        (l_acc[h]),
      .fetches_o    (l_fetches[h]),
      .wr_row_en_i  (1'b0),
      .wr_row_addr_i('0),
      .wr_row_data_i('0),
      .wr_col_en_i  (state_q == PE_KV_WRITE),
      .wr_col_grp_i (t_q),
      .wr_col_data_i(k_col)
    );

    // V cache: rows = tokens, one row per token; computes A_h = S_h V_h.
    pim_gemv #(.ROWS(N), .F(DK), .GW(ABP), .ABP(ABP), .ACC_W(ACC_W)) u_v (
      .clk          (clk),
      .rst_n        (rst_n),
      .start_i      (kick_q && state_q == PE_A_GEMV),
      .act_i        (s_buf[h]),
      .busy_o       (v_busy[h]),
      .done_o       (v_done[h]),
      .acc_o        (v_acc[h]),
      .fetches_o    (v_fetches[h]),
      .wr_row_en_i  (state_q == PE_KV_WRITE),
      .wr_row_addr_i(t_q),
      .wr_row_data_i(v_row),
      .wr_col_en_i  (1'b0),
      .wr_col_grp_i ('0),
      .wr_col_data_i('0)
    );
  end

  // ------------------------------------------------------------ softmax
  logic [N-1:0][ABP-1:0] lq;
  logic [SW-1:0]         lq_s;
  logic [NE_W-1:0]       ne, ne_lut;
  vdr_param_t            sm_param;
  logic                  sm_valid;
  logic [N-1:0][ABP-1:0] sm_out;
  logic [LUT_A_W+LUT_S_W-1:0] sm_scale;
  logic [SMW-1:0]        sm_shift;
  logic [H-1:0][N-1:0][ACC_W-1:0] l_sel_src;
  logic [$clog2(H)-1:0]  h_idx;

  assign l_sel_src = l_acc;
  assign h_idx     = h_q[$clog2(H)-1:0];

  emsb_q #(.N(N), .IN_W(ACC_W), .OUT_W(ABP)) u_q_l (
    .x_i(l_sel_src[h_idx]), .mode_i(EMSBQ_AUTO), .fixed_shift_i('0), .q_o(lq), .shift_o(lq_s));

  always_comb begin
    logic [NE_W+1:0] sum;
    sum = (NE_W+2)'(x_ne_i) + (NE_W+2)'(q_s_q) + (NE_W+2)'(lq_s);
    ne  = (sum > (NE_W+2)'({NE_W{1'b1}})) ? {NE_W{1'b1}} : sum[NE_W-1:0];
  end

  vdr_lut #(.NE_W(NE_W)) u_lut (
    .clk    (clk),
    .rst_n  (rst_n),
    .we_i   (lut_we_i),
    .waddr_i(lut_addr_i),
    .wdata_i(lut_data_i),
    .ne_i   (ne_lut),
    .param_o(sm_param)
  );

  vdr_softmax #(.N(N), .Q_I(ABP), .QO_W(ABP), .NE_W(NE_W)) u_softmax (
    .clk    (clk),
    .rst_n  (rst_n),
    .start_i(state_q == PE_SOFTMAX && !sm_wait_q),
    .x_i    (lq),
    .ne_i   (ne),
    .ne_o   (ne_lut),
    .param_i(sm_param),
    .valid_o(sm_valid),
    .s_o    (sm_out),
    .s_exp_o(sm_scale),
    .shift_o(sm_shift)
  );

  // ------------------------------------------------------------ sequencer
  assign tok_ready_o = (state_q == PE_KV_WAIT) || (state_q == PE_Q_WAIT);
  assign out_valid_o = (state_q == PE_OUT);
  assign busy_o      = (state_q != PE_IDLE);
  assign done_o      = (state_q == PE_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= PE_IDLE;
      kick_q    <= 1'b0;
      t_q       <= '0;
      h_q       <= '0;
      sm_wait_q <= 1'b0;
      x_q       <= '0;
      q_q       <= '0;
      a_q       <= '0;
      s_buf     <= '0;
      q_s_q     <= '0;
      a_s_q     <= '0;
      l_fin_q   <= '0;
      v_fin_q   <= '0;
      out_o     <= '0;
      out_exp_o <= '0;
    end else begin
      kick_q <= 1'b0;
      unique case (state_q)
        PE_IDLE: if (start_i) begin
          t_q     <= '0;
          state_q <= PE_KV_WAIT;
        end
        PE_KV_WAIT, PE_Q_WAIT: if (tok_valid_i) begin
          for (int unsigned i = 0; i < D; i++) x_q[i] <= ABP'($signed(tok_i[i]));
          kick_q  <= 1'b1;
          state_q <= (state_q == PE_KV_WAIT) ? PE_KV_GEMV : PE_Q_GEMV;
        end
        PE_KV_GEMV: if (aw_done[1]) state_q <= PE_KV_WRITE;
        PE_KV_WRITE: begin
          if (32'(t_q) == N-1) begin
            t_q     <= '0;
            state_q <= PE_Q_WAIT;
          end else begin
            t_q     <= t_q + 1'b1;
            state_q <= PE_KV_WAIT;
          end
        end
        PE_Q_GEMV: if (aw_done[0]) begin
          q_q     <= qq;
          q_s_q   <= qq_s;
          l_fin_q <= '0;
          kick_q  <= 1'b1;
          state_q <= PE_L_GEMV;
        end
        PE_L_GEMV: begin
          if (!kick_q) begin
            if ((l_fin_q | l_done) == '1) begin
              h_q       <= '0;
              sm_wait_q <= 1'b0;
              state_q   <= PE_SOFTMAX;
            end
            l_fin_q <= l_fin_q | l_done;
          end
        end
        PE_SOFTMAX: begin
          if (!sm_wait_q) sm_wait_q <= 1'b1;
          else if (sm_valid) begin
            s_buf[h_idx] <= sm_out;
            sm_wait_q    <= 1'b0;
            if (32'(h_q) == H-1) begin
              v_fin_q <= '0;
              kick_q  <= 1'b1;
              state_q <= PE_A_GEMV;
            end else begin
              h_q <= h_q + 1'b1;
            end
          end
        end
        PE_A_GEMV: begin
          if (!kick_q) begin
            if ((v_fin_q | v_done) == '1) begin
              a_q     <= aq;
              a_s_q   <= aq_s;
              kick_q  <= 1'b1;
              state_q <= PE_O_GEMV;
            end
            v_fin_q <= v_fin_q | v_done;
          end
        end
        PE_O_GEMV: if (aw_done[3]) begin
          out_o     <= oq;
          out_exp_o <= NE_W'(a_s_q) + NE_W'(oq_s);
          state_q   <= PE_OUT;
        end
        PE_OUT: if (out_ready_i) begin
          if (32'(t_q) == N-1) state_q <= PE_DONE;
          else begin
            t_q     <= t_q + 1'b1;
            state_q <= PE_Q_WAIT;
          end
        end
        PE_DONE: state_q <= PE_IDLE;
        default: state_q <= PE_IDLE;
      endcase
    end
  end
endmodule
