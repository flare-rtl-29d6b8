// tb_sawl_d_ctrl: for fetches with 1..8 real word lines the controller must
// raise exactly 8 - SAWL dummy word lines, filled from dummy row 0, so that
// eight lines are always active; an empty fetch raises none.
module tb_sawl_d_ctrl;
  import flare_pkg::*;
  localparam int ROWS = 96;
  logic [ROWS-1:0] wl;
  logic [6:0]      dwl;
  logic [3:0]      sawl, total;
  int checks = 0, failures = 0;

  sawl_d_ctrl #(.ROWS(ROWS)) dut (.wl_i(wl), .dummy_wl_o(dwl), .sawl_o(sawl), .total_o(total));

  initial begin
    for (int k = 0; k < 2000; k++) begin
      int n; logic [6:0] exp_d;
      n = $urandom_range(0, 8);
      wl = '0;
      while ($countones(wl) < n) wl[$urandom_range(0, ROWS-1)] = 1'b1;
      exp_d = '0;
      if (n > 0) for (int d = 0; d < 8 - n; d++) exp_d[d] = 1'b1;
      #1;
      checks++;
      if (dwl !== exp_d || sawl !== 4'(n) || total !== ((n == 0) ? 4'd0 : 4'd8)) begin
        failures++;
        $display("FAIL n=%0d dwl=%b exp=%b total=%0d", n, dwl, exp_d, total);
      end
    end
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
