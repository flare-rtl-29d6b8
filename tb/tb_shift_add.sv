// tb_shift_add: feeds random ADC codes (0..8) for random signed bit planes and
// checks the accumulators against integer arithmetic done in the testbench:
// code of column b weighs 2^b (the top stored bit -2^(GW-1)), the plane 2^p,
// negated on the sign plane. Also checks clear.
module tb_shift_add;
  import flare_pkg::*;
  localparam int F = 3, GW = 8, ACC_W = 28;
  logic clk = 0, rst_n = 0;
  logic clr, add, neg;
  logic [F*GW-1:0][3:0] adc;
  logic [3:0] plane;
  logic [F-1:0][ACC_W-1:0] acc;
  longint model [F];
  int checks = 0, failures = 0;

  shift_add #(.F(F), .GW(GW), .PBITS(4), .ACC_W(ACC_W)) dut (.clk(clk), .rst_n(rst_n), .clr_i(clr), .add_i(add),
    .adc_i(adc), .plane_i(plane), .neg_i(neg), .acc_o(acc));

  always #5 clk = ~clk;

  initial begin
    clr = 0; add = 0; neg = 0; adc = '0; plane = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      clr = 1; @(negedge clk); clr = 0;
      for (int f = 0; f < F; f++) model[f] = 0;
      for (int k = 0; k < 20; k++) begin
        add = 1;
        plane = 4'($urandom_range(0, 8));
        neg = (plane == 8);
        for (int c = 0; c < F*GW; c++) adc[c] = 4'($urandom_range(0, 8));
        for (int f = 0; f < F; f++) begin
          longint p; p = 0;
          for (int b = 0; b < GW; b++)
            p += (b == GW-1 ? -1 : 1) * longint'(adc[f*GW+b]) * (longint'(1) << b);
          p = p * (longint'(1) << plane);
          model[f] += neg ? -p : p;
        end
        @(negedge clk);
      end
      add = 0;
      for (int f = 0; f < F; f++) begin
        checks++;
        if (longint'($signed(acc[f])) != model[f]) begin
          failures++;
          $display("FAIL f=%0d acc=%0d exp=%0d", f, $signed(acc[f]), model[f]);
        end
      end
    end
    clr = 1; @(negedge clk); clr = 0;
    checks++;
    if (acc != '0) begin failures++; $display("FAIL clear"); end
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
