// tb_vdr_iexp: sweeps every x_sub from 0 down past the clip limit for two
// table entries (l = 64 and l = 23) and compares r_EXP with an integer model
// using a real division: Q = min(floor(-x/l), 18), r = x + Q*l,
// r_EXP = (r*(r+b)+c) >> Q. It also checks that r_EXP / c tracks e^(x*ln2/l)
// within 2.5% while the result is still well resolved, i.e. that the
// integer pipeline really is an exponential with a table-chosen base.
module tb_vdr_iexp;
  import flare_pkg::*;
  logic signed [9:0] xs;
  vdr_param_t p;
  logic [23:0] r_exp;
  logic [15:0] s_poly;
  int checks = 0, failures = 0;

  vdr_iexp #(.Q_I(9), .XW(10)) dut (.x_sub_i(xs), .p_i(p), .r_exp_o(r_exp), .s_poly_o(s_poly));

  task automatic sweep(input int l, input int b, input int c);
    p.a = 8'd92; p.s = 8'd3; p.l = 8'(l); p.b = 10'(b); p.c = 16'(c);
    for (int x = 0; x >= -512; x--) begin
      int xc, q, r; longint poly; longint e; real ratio, ideal;
      xc = (x < -18*l) ? -18*l : x;
      q  = (-xc) / l;
      if (q > 18) q = 18;
      r  = xc + q*l;
      poly = longint'(r) * longint'(r + b) + longint'(c);
      if (poly < 0) poly = 0;
      e = poly >>> q;
      xs = 10'(x); #1;
      checks++;
      if (longint'(r_exp) != e || s_poly != 16'(92*3)) begin
        failures++; $display("FAIL l=%0d x=%0d r_exp=%0d exp=%0d", l, x, r_exp, e);
      end
      if (r_exp > 200) begin
        ideal = $exp(real'(x) * 0.693147 / real'(l));
        ratio = real'(r_exp) / real'(c);
        checks++;
        if (ratio > ideal * 1.025 || ratio < ideal * 0.975) begin
          failures++; $display("FAIL approx x=%0d ratio=%f ideal=%f", x, ratio, ideal);
        end
      end
    end
  endtask

  initial begin
    sweep(64, 250, 23787);   // input unit ln2/64
    sweep(23, 90, 3077);     // coarser input unit (larger n_e): ln2/23
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
