// tb_vdr_softmax: random 9-bit logit vectors through a 16-lane VDR-Softmax.
// Expected scores come from a model written with real division: max
// subtraction, Q = min(floor(-x/l), 18), the polynomial, >> Q, then the eMSB-Q
// rule (shift so the largest exponential fills 8 magnitude bits). Checks
// the result, that the arg-max gets a score with its top bit set, and that
// the result appears exactly three cycles after start.
module tb_vdr_softmax;
  import flare_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, start, valid;
  logic [N-1:0][8:0] x, s;
  logic [5:0] ne, ne_o;
  vdr_param_t p;
  logic [15:0] sexp;
  logic [4:0] sh;
  int checks = 0, failures = 0;

  vdr_softmax #(.N(N), .Q_I(9), .QO_W(9), .NE_W(6)) dut (.clk(clk), .rst_n(rst_n), .start_i(start), .x_i(x),
    .ne_i(ne), .ne_o(ne_o), .param_i(p), .valid_o(valid), .s_o(s), .s_exp_o(sexp), .shift_o(sh));
  always #5 clk = ~clk;

  initial begin
    start = 0; x = '0; ne = '0;
    p.a = 8'd92; p.s = 8'd1; p.l = 8'd64; p.b = 10'd250; p.c = 16'd23787;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      longint e [N]; longint mx; int xmax, need, esh, lat, amax;
      int spread;
      spread = (k % 3 == 0) ? 40 : 255;
      for (int i = 0; i < N; i++) x[i] = 9'($urandom_range(0, spread) - spread/2);
      xmax = -1000; amax = 0;
      for (int i = 0; i < N; i++) if ($signed(x[i]) > xmax) begin xmax = $signed(x[i]); amax = i; end
      mx = 0;
      for (int i = 0; i < N; i++) begin
        int xc, q, r; longint poly;
        xc = $signed(x[i]) - xmax;
        if (xc < -18*64) xc = -18*64;
        q = (-xc) / 64; if (q > 18) q = 18;
        r = xc + q*64;
        poly = longint'(r) * longint'(r + 250) + 23787;
        e[i] = poly >>> q;
        if (e[i] > mx) mx = e[i];
      end
      need = 1; while (mx >= (longint'(1) << (need-1))) need++;
      esh = (need > 9) ? need - 9 : 0;
      @(negedge clk); start = 1; ne = 6'(k % 20);
      @(negedge clk); start = 0;
      lat = 1;
      while (!valid && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 3) begin failures++; $display("FAIL latency %0d", lat); end
      checks++;
      if (int'(sh) != esh || ne_o != ne) begin failures++; $display("FAIL shift %0d exp %0d", sh, esh); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (longint'(s[i]) != (e[i] >>> esh)) begin
          failures++; $display("FAIL i=%0d s=%0d exp=%0d", i, s[i], e[i] >>> esh);
        end
      end
      checks++;
      if (s[amax][7] != 1'b1 || s[amax][8] != 1'b0) begin failures++; $display("FAIL argmax not at top"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
