// tb_flare_top: end-to-end test of the FLARE PE array with two PEs
// (D=64, N=8, H=2). Each PE gets its own random weights, softmax table,
// K/V parsing shift and n_e offset, and both run one attention layer on their
// own token stream at the same time. Tokens are sent with random gaps and
// outputs are taken with random back-pressure; every output word and
// exponent is compared with the integer model in flare_ref_pkg.
// The test also counts how often each mechanism of the design was exercised,
// by watching internal signals of the PEs, and fails for any count of zero:
// dense 32-bit slice, multi-cycle bit plane, dummy-row padding, zero-plane
// skip, eMSB shift > 0, K/V saturation, n_e table clip, token stall, output
// back-pressure, and both PEs busy together.
module tb_flare_top;
  import flare_pkg::*;
  import flare_ref_pkg::*;
  localparam int P = 2, D = 64, N = 8, H = 2, DK = D/H, ABP = 9;
  localparam int KVSH [P] = '{9, 3};
  localparam int XNE  [P] = '{1, 12};

  logic clk = 0, rst_n = 0;
  logic [P-1:0] w_we, lut_we, start, busy, done, tok_valid, tok_ready, out_valid, out_ready;
  logic [P-1:0][4:0] kv_shift;
  logic [P-1:0][5:0] x_ne;
  logic [1:0] w_sel;
  logic [$clog2(D)-1:0] w_row;
  logic [D*8-1:0] w_data;
  logic [3:0] lut_addr;
  vdr_param_t lut_data;
  logic [P-1:0][D-1:0][7:0] tok;
  logic [P-1:0][D-1:0][8:0] out;
  logic [P-1:0][5:0] out_exp;
  int checks = 0, failures = 0;

  flare_top #(.NUM_PE(P), .D(D), .N(N), .H(H)) dut (
    .clk(clk), .rst_n(rst_n), .kv_shift_i(kv_shift), .x_ne_i(x_ne),
    .w_we_i(w_we), .w_sel_i(w_sel), .w_row_i(w_row), .w_data_i(w_data),
    .lut_we_i(lut_we), .lut_addr_i(lut_addr), .lut_data_i(lut_data),
    .start_i(start), .busy_o(busy), .done_o(done),
    .tok_valid_i(tok_valid), .tok_ready_o(tok_ready), .tok_i(tok),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_o(out), .out_exp_o(out_exp));

  always #5 clk = ~clk;

  flare_ref_pkg::mat_t W [P][4];
  flare_ref_pkg::mat_t X [P];
  int lut_l [P][16], lut_b [P][16], lut_c [P][16];
  flare_ref_pkg::vec_t exp_out [P][N];
  int exp_exp [P][N];

  // ---------------------------------------------------------- mechanism counters
  int n_dense, n_multi, n_dummy, n_skip, n_shift, n_sat, n_clip, n_tstall, n_ostall, n_both, n_done;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_pe[0].u_pe.g_aw[1].u_gemv.u_bitsift.fetch_o && dut.g_pe[0].u_pe.g_aw[1].u_gemv.u_bitsift.dense != '0) n_dense++;
    if (dut.g_pe[0].u_pe.g_aw[1].u_gemv.u_bitsift.fetch_o && !dut.g_pe[0].u_pe.g_aw[1].u_gemv.u_bitsift.last_o) n_multi++;
    if (dut.g_pe[0].u_pe.g_aw[1].u_gemv.cmp && dut.g_pe[0].u_pe.g_aw[1].u_gemv.dummy_wl != '0) n_dummy++;
    if (dut.g_pe[0].u_pe.g_aw[1].u_gemv.state_q.name() == "G_LOAD" &&
        dut.g_pe[0].u_pe.g_aw[1].u_gemv.plane_bits == '0) n_skip++;
    if (out_valid[0] && out_ready[0] && dut.g_pe[0].u_pe.u_q_o.shift_o != '0) n_shift++;
    if (dut.g_pe[1].u_pe.state_q == PE_KV_WRITE)
      for (int i = 0; i < D; i++)
        if (dut.g_pe[1].u_pe.u_q_k.q_o[i] == 9'h0ff || dut.g_pe[1].u_pe.u_q_k.q_o[i] == 9'h100) n_sat++;
    if (dut.g_pe[1].u_pe.u_softmax.start_i && dut.g_pe[1].u_pe.u_softmax.ne_i > 6'd15) n_clip++;
    for (int p = 0; p < P; p++) begin
      if (tok_valid[p] && !tok_ready[p]) n_tstall++;
      if (out_valid[p] && !out_ready[p]) n_ostall++;
      if (done[p]) n_done++;
    end
    if (busy == '1) n_both++;
  end

  task automatic build_model(int p);
    flare_ref_pkg::vec_t Kq [N], Vq [N];
    for (int t = 0; t < N; t++) begin
      flare_ref_pkg::vec_t x;
      x = new[D]; foreach (x[i]) x[i] = X[p][t][i];
      Kq[t] = emsbq_fixed(gemv(x, W[p][1], D), ABP, KVSH[p]);
      Vq[t] = emsbq_fixed(gemv(x, W[p][2], D), ABP, KVSH[p]);
    end
    for (int t = 0; t < N; t++) begin
      flare_ref_pkg::vec_t x, qq, a, aq, oq; int qs, as_, os;
      x = new[D]; foreach (x[i]) x[i] = X[p][t][i];
      qq = emsbq_auto(gemv(x, W[p][0], D), ABP, qs);
      a = new[D];
      for (int h = 0; h < H; h++) begin
        flare_ref_pkg::vec_t l, lq, s; int ls, ne, e;
        l = new[N];
        for (int j = 0; j < N; j++) begin
          l[j] = 0;
          for (int r = 0; r < DK; r++) l[j] += qq[h*DK+r] * Kq[j][h*DK+r];
        end
        lq = emsbq_auto(l, ABP, ls);
        ne = XNE[p] + qs + ls; if (ne > 63) ne = 63;
        e = (ne > 15) ? 15 : ne;
        s = softmax(lq, lut_l[p][e], lut_b[p][e], lut_c[p][e], ABP);
        for (int f = 0; f < DK; f++) begin
          a[h*DK+f] = 0;
          for (int j = 0; j < N; j++) a[h*DK+f] += s[j] * Vq[j][h*DK+f];
        end
      end
      aq = emsbq_auto(a, ABP, as_);
      oq = emsbq_auto(gemv(aq, W[p][3], D), ABP, os);
      exp_out[p][t] = oq; exp_exp[p][t] = (as_ + os) % 64;
    end
  endtask

  task automatic send_token(int p, int t);
    while ($urandom_range(0, 2) == 0) @(negedge clk);
    tok_valid[p] = 1'b1;
    for (int i = 0; i < D; i++) tok[p][i] = 8'(X[p][t][i]);
    while (!tok_ready[p]) @(negedge clk);
    @(negedge clk);
    tok_valid[p] = 1'b0;
  endtask

  task automatic take_outputs(int p);
    for (int t = 0; t < N; t++) begin
      while (!out_valid[p]) @(negedge clk);
      repeat ($urandom_range(0, 3)) @(negedge clk);
      checks++;
      if (int'(out_exp[p]) != exp_exp[p][t]) begin
        failures++; $display("FAIL PE %0d token %0d exponent %0d expected %0d", p, t, out_exp[p], exp_exp[p][t]);
      end
      for (int i = 0; i < D; i++) begin
        checks++;
        if (longint'($signed(out[p][i])) != exp_out[p][t][i]) begin
          failures++;
          if (failures < 10) $display("FAIL PE %0d token %0d elem %0d out %0d expected %0d",
                                      p, t, i, $signed(out[p][i]), exp_out[p][t][i]);
        end
      end
      out_ready[p] = 1'b1; @(negedge clk); out_ready[p] = 1'b0;
    end
  endtask

  task automatic check_seen(string what, int n);
    checks++;
    $display("mechanism %-28s seen %0d times", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
  endtask

  initial begin
    w_we = '0; lut_we = '0; start = '0; tok_valid = '0; out_ready = '0;
    w_sel = '0; w_row = '0; w_data = '0; lut_addr = '0; lut_data = '0; tok = '0;
    for (int p = 0; p < P; p++) begin
      kv_shift[p] = 5'(KVSH[p]); x_ne[p] = 6'(XNE[p]);
      for (int m = 0; m < 4; m++) begin
        W[p][m] = new[D];
        foreach (W[p][m][r]) begin
          W[p][m][r] = new[D];
          foreach (W[p][m][r][f]) W[p][m][r][f] = longint'($signed(8'($urandom())));
        end
      end
      X[p] = new[N];
      foreach (X[p][t]) begin
        X[p][t] = new[D];
        // token 0 is dense, token 1 small and non-negative (empty upper bit
        // planes), the rest are sparse with mixed magnitudes
        foreach (X[p][t][i])
          if (t == 1) X[p][t][i] = $urandom_range(0, 7);
          else X[p][t][i] = (t == 0 || $urandom_range(0, 3) == 0) ?
                       longint'($signed(8'($urandom()))) >>> $urandom_range(0, 5) : 0;
      end
      for (int e = 0; e < 16; e++) begin
        real sc;
        lut_l[p][e] = 64 - 3*e - p;
        sc = 0.693147 / real'(lut_l[p][e]);
        lut_b[p][e] = int'(2.706 / sc);
        lut_c[p][e] = int'(2.790 / (sc*sc));
      end
      build_model(p);
    end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int p = 0; p < P; p++) begin
      for (int m = 0; m < 4; m++) for (int r = 0; r < D; r++) begin
        w_we = '0; w_we[p] = 1'b1; w_sel = 2'(m); w_row = 6'(r);
        for (int f = 0; f < D; f++) w_data[f*8 +: 8] = 8'(W[p][m][r][f]);
        @(negedge clk);
      end
      w_we = '0;
      for (int e = 0; e < 16; e++) begin
        lut_we = '0; lut_we[p] = 1'b1; lut_addr = 4'(e);
        lut_data.a = 8'd92; lut_data.s = 8'd1; lut_data.l = 8'(lut_l[p][e]);
        lut_data.b = 10'(lut_b[p][e]); lut_data.c = 16'(lut_c[p][e]);
        @(negedge clk);
      end
      lut_we = '0;
    end
    start = '1; @(negedge clk); start = '0;
    fork
      begin for (int t = 0; t < N; t++) send_token(0, t); for (int t = 0; t < N; t++) send_token(0, t); end
      begin for (int t = 0; t < N; t++) send_token(1, t); for (int t = 0; t < N; t++) send_token(1, t); end
      take_outputs(0);
      take_outputs(1);
    join
    repeat (3) @(negedge clk);
    checks++;
    if (busy != '0) begin failures++; $display("FAIL PEs still busy"); end
    check_seen("dense 32-bit slice", n_dense);
    check_seen("multi-cycle bit plane", n_multi);
    check_seen("dummy-row padding", n_dummy);
    check_seen("zero-plane skip", n_skip);
    check_seen("eMSB shift > 0", n_shift);
    check_seen("K/V parse saturation", n_sat);
    check_seen("n_e table clip", n_clip);
    check_seen("token-input stall", n_tstall);
    check_seen("output back-pressure", n_ostall);
    check_seen("both PEs busy", n_both);
    check_seen("layer done", n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
