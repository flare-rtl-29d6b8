// tb_lpc_slice: checks the local-pop controller against a bit-by-bit model:
// the marked bits must be the first eight ones of the slice (from bit 0), the
// popcount their number, and `dense` set exactly when ones are left over.
module tb_lpc_slice;
  import flare_pkg::*;
  logic [31:0] bits, marked;
  logic [3:0]  pop;
  logic        dense;
  int checks = 0, failures = 0;

  lpc_slice #(.W(32)) dut (.bits_i(bits), .marked_o(marked), .pop_o(pop), .dense_o(dense));

  task automatic check_one(input logic [31:0] v);
    logic [31:0] exp_m; int n, tot;
    exp_m = '0; n = 0; tot = 0;
    for (int i = 0; i < 32; i++) if (v[i]) begin
      tot++;
      if (n < 8) begin exp_m[i] = 1'b1; n++; end
    end
    bits = v; #1;
    checks++;
    if (marked !== exp_m || pop !== 4'(n) || dense !== (tot > 8)) begin
      failures++;
      $display("FAIL bits=%h marked=%h exp=%h pop=%0d exp=%0d dense=%0b", v, marked, exp_m, pop, n, dense);
    end
  endtask

  initial begin
    check_one(32'h0);
    check_one(32'hFFFF_FFFF);
    check_one(32'h8000_0001);
    check_one(32'h0000_00FF);
    check_one(32'h0000_01FF);
    for (int k = 0; k < 2000; k++) begin
      logic [31:0] v;
      v = $urandom();
      if (k % 3 == 0) v = v & $urandom() & $urandom();
      check_one(v);
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
