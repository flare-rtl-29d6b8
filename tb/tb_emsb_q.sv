// tb_emsb_q: random groups of signed 28-bit values of random magnitude. In
// AUTO mode the expected shift is (bits needed by the widest element) - 9,
// at least 0, and each output the arithmetically shifted value; the largest
// magnitude must keep its top bit right under the sign. In FIXED mode the
// shift is the configured one and the results saturate. The Fig. 10(a)
// examples (eMSB of a negative and of a positive number) are checked too.
module tb_emsb_q;
  import flare_pkg::*;
  localparam int N = 8, IN_W = 28, OUT_W = 9;
  logic [N-1:0][IN_W-1:0] x;
  emsbq_mode_e mode;
  logic [4:0] fsh, sh;
  logic [N-1:0][OUT_W-1:0] q;
  int checks = 0, failures = 0;

  emsb_q #(.N(N), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.x_i(x), .mode_i(mode), .fixed_shift_i(fsh), .q_o(q), .shift_o(sh));

  function automatic int bits_needed(input longint v);
    int k; k = 1;
    while (!(v >= -(longint'(1) << (k-1)) && v < (longint'(1) << (k-1)))) k++;
    return k;
  endfunction

  task automatic check_group(input emsbq_mode_e m, input int fs);
    int need, esh;
    need = 1;
    for (int i = 0; i < N; i++) if (bits_needed(longint'($signed(x[i]))) > need) need = bits_needed(longint'($signed(x[i])));
    esh = (m == EMSBQ_FIXED) ? fs : ((need > OUT_W) ? need - OUT_W : 0);
    mode = m; fsh = 5'(fs); #1;
    checks++;
    if (int'(sh) != esh) begin failures++; $display("FAIL shift=%0d exp=%0d", sh, esh); end
    for (int i = 0; i < N; i++) begin
      longint e;
      e = longint'($signed(x[i])) >>> esh;
      if (e > 255) e = 255;
      if (e < -256) e = -256;
      checks++;
      if (longint'($signed(q[i])) != e) begin
        failures++; $display("FAIL i=%0d x=%0d q=%0d exp=%0d", i, $signed(x[i]), $signed(q[i]), e);
      end
    end
  endtask

  initial begin
    // Fig. 10(a): 1111_1111_0... -> eMSB at the first 0; 0000...1 at bit 11
    x = '0;
    x[0] = {4'b0, 24'b1111_1111_0111_1111_1111_1101};  // positive 24-bit pattern, top one at bit 23
    check_group(EMSBQ_AUTO, 0);                          // needs 25 bits -> shift 16
    checks++; if (sh != 5'd16) begin failures++; $display("FAIL fig10 positive"); end
    x = '0;
    x[0] = 28'(-(1 << 11));                              // negative, eMSB (first 0) at bit 10
    check_group(EMSBQ_AUTO, 0);
    for (int k = 0; k < 3000; k++) begin
      int mag;
      mag = $urandom_range(1, 26);
      for (int i = 0; i < N; i++) x[i] = IN_W'($signed($urandom()) >>> (32 - mag));
      check_group((k % 4 == 3) ? EMSBQ_FIXED : EMSBQ_AUTO, $urandom_range(0, 20));
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
