// tb_flare_pe: one attention layer through a small FLARE PE (D=64, N=8,
// H=2, d_k=32). Random 8-bit weights and sparse 8-bit tokens are loaded, the
// token sequence is streamed twice with random gaps, and the output is taken
// with random back-pressure. Every output token and its exponent are
// compared with the integer model in flare_ref_pkg. The W_K GEMV latency of
// every token is compared with the BitSift cycle count of the model.
module tb_flare_pe;
  import flare_pkg::*;
  import flare_ref_pkg::*;
  localparam int D = 64, N = 8, H = 2, DK = D/H, ABP = 9, KVSH = 9, XNE = 1;

  logic clk = 0, rst_n = 0;
  logic w_we, lut_we, start, busy, done, tok_valid, tok_ready, out_valid, out_ready;
  logic [1:0] w_sel;
  logic [$clog2(D)-1:0] w_row;
  logic [D*8-1:0] w_data;
  logic [3:0] lut_addr;
  vdr_param_t lut_data;
  logic [D-1:0][7:0] tok;
  logic [D-1:0][8:0] out;
  logic [5:0] out_exp;
  int checks = 0, failures = 0;

  flare_pe #(.D(D), .N(N), .H(H), .DK(DK)) dut (
    .clk(clk), .rst_n(rst_n), .kv_shift_i(5'(KVSH)), .x_ne_i(6'(XNE)),
    .w_we_i(w_we), .w_sel_i(w_sel), .w_row_i(w_row), .w_data_i(w_data),
    .lut_we_i(lut_we), .lut_addr_i(lut_addr), .lut_data_i(lut_data),
    .start_i(start), .busy_o(busy), .done_o(done),
    .tok_valid_i(tok_valid), .tok_ready_o(tok_ready), .tok_i(tok),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_o(out), .out_exp_o(out_exp));

  always #5 clk = ~clk;

  flare_ref_pkg::mat_t W [4];
  flare_ref_pkg::mat_t X;
  int lut_l [16], lut_b [16], lut_c [16];
  flare_ref_pkg::vec_t Kq [N], Vq [N];
  flare_ref_pkg::vec_t exp_out [N];
  int exp_exp [N];
  int exp_kcyc [N];

  // K/V gemv latency monitor
  int kcyc_meas [$];
  int kcnt; bit kon;
  always @(posedge clk) begin
    if (dut.aw_start[1]) begin kon <= 1; kcnt <= 0; end
    else if (kon) begin
      kcnt <= kcnt + 1;
      if (dut.aw_done[1]) begin kon <= 0; kcyc_meas.push_back(kcnt + 1); end
    end
  end

  task automatic build_model();
    for (int t = 0; t < N; t++) begin
      flare_ref_pkg::vec_t x, k, v;
      x = new[D]; foreach (x[i]) x[i] = X[t][i];
      k = gemv(x, W[1], D); v = gemv(x, W[2], D);
      Kq[t] = emsbq_fixed(k, ABP, KVSH); Vq[t] = emsbq_fixed(v, ABP, KVSH);
      exp_kcyc[t] = gemv_cycles(x, ABP);
    end
    for (int t = 0; t < N; t++) begin
      flare_ref_pkg::vec_t x, q, qq, a, aq, o, oq; int qs, as_, os;
      x = new[D]; foreach (x[i]) x[i] = X[t][i];
      q = gemv(x, W[0], D); qq = emsbq_auto(q, ABP, qs);
      a = new[D];
      for (int h = 0; h < H; h++) begin
        flare_ref_pkg::vec_t l, lq, s; int ls, ne, e;
        l = new[N];
        for (int j = 0; j < N; j++) begin
          l[j] = 0;
          for (int r = 0; r < DK; r++) l[j] += qq[h*DK+r] * Kq[j][h*DK+r];
        end
        lq = emsbq_auto(l, ABP, ls);
        ne = XNE + qs + ls; if (ne > 63) ne = 63;
        e = (ne > 15) ? 15 : ne;
        s = softmax(lq, lut_l[e], lut_b[e], lut_c[e], ABP);
        for (int f = 0; f < DK; f++) begin
          a[h*DK+f] = 0;
          for (int j = 0; j < N; j++) a[h*DK+f] += s[j] * Vq[j][h*DK+f];
        end
      end
      aq = emsbq_auto(a, ABP, as_);
      o = gemv(aq, W[3], D); oq = emsbq_auto(o, ABP, os);
      exp_out[t] = oq; exp_exp[t] = (as_ + os) % 64;
    end
  endtask

  task automatic send_token(int t);
    while ($urandom_range(0, 2) == 0) @(negedge clk);
    tok_valid = 1;
    for (int i = 0; i < D; i++) tok[i] = 8'(X[t][i]);
    while (!tok_ready) @(negedge clk);
    @(negedge clk);
    tok_valid = 0;
  endtask

  initial begin
    w_we = 0; lut_we = 0; start = 0; tok_valid = 0; out_ready = 0;
    w_sel = '0; w_row = '0; w_data = '0; lut_addr = '0; lut_data = '0; tok = '0;
    for (int m = 0; m < 4; m++) begin
      W[m] = new[D];
      foreach (W[m][r]) begin
        W[m][r] = new[D];
        foreach (W[m][r][f]) W[m][r][f] = longint'($signed(8'($urandom())));
      end
    end
    X = new[N];
    foreach (X[t]) begin
      X[t] = new[D];
      foreach (X[t][i]) X[t][i] = ($urandom_range(0, 3) == 0) ? longint'($signed(8'($urandom()))) >>> $urandom_range(0, 5) : 0;
    end
    for (int e = 0; e < 16; e++) begin
      real sc;
      lut_l[e] = 64 - 3*e;
      sc = 0.693147 / real'(lut_l[e]);
      lut_b[e] = int'(2.706 / sc);
      lut_c[e] = int'(2.790 / (sc*sc));
    end
    build_model();
    repeat (3) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 4; m++) for (int r = 0; r < D; r++) begin
      w_we = 1; w_sel = 2'(m); w_row = 6'(r);
      for (int f = 0; f < D; f++) w_data[f*8 +: 8] = 8'(W[m][r][f]);
      @(negedge clk);
    end
    w_we = 0;
    for (int e = 0; e < 16; e++) begin
      lut_we = 1; lut_addr = 4'(e);
      lut_data.a = 8'd92; lut_data.s = 8'd1; lut_data.l = 8'(lut_l[e]);
      lut_data.b = 10'(lut_b[e]); lut_data.c = 16'(lut_c[e]);
      @(negedge clk);
    end
    lut_we = 0;
    start = 1; @(negedge clk); start = 0;
    fork
      begin
        for (int t = 0; t < N; t++) send_token(t);
        for (int t = 0; t < N; t++) send_token(t);
      end
      begin
        for (int t = 0; t < N; t++) begin
          out_ready = 0;
          while (!out_valid) @(negedge clk);
          repeat ($urandom_range(0, 3)) @(negedge clk);
          checks++;
          if (int'(out_exp) != exp_exp[t]) begin
            failures++; $display("FAIL token %0d exponent %0d expected %0d", t, out_exp, exp_exp[t]);
          end
          for (int i = 0; i < D; i++) begin
            checks++;
            if (longint'($signed(out[i])) != exp_out[t][i]) begin
              failures++;
              if (failures < 10) $display("FAIL token %0d elem %0d out %0d expected %0d", t, i, $signed(out[i]), exp_out[t][i]);
            end
          end
          out_ready = 1; @(negedge clk); out_ready = 0;
        end
      end
    join
    repeat (3) @(negedge clk);
    begin
      int nz = 0;
      for (int t = 0; t < N; t++) for (int i = 0; i < D; i++) if (exp_out[t][i] != 0) nz++;
      $display("non-zero output elements: %0d of %0d, exponent of token 0: %0d", nz, N*D, exp_exp[0]);
      checks++;
      if (nz < N*D/4) begin failures++; $display("FAIL outputs are mostly zero"); end
    end
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
    checks++;
    if (kcyc_meas.size() != N) begin failures++; $display("FAIL %0d K gemvs", kcyc_meas.size()); end
    else for (int t = 0; t < N; t++) begin
      checks++;
      if (kcyc_meas[t] != exp_kcyc[t]) begin
        failures++; $display("FAIL token %0d K GEMV %0d cycles, expected %0d", t, kcyc_meas[t], exp_kcyc[t]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
