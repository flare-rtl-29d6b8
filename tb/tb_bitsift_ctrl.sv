// tb_bitsift_ctrl: loads random bit planes of varied density (including
// all-zero and all-one planes) and collects the fetches. Checks: every fetch
// holds 1..8 ones and reports that count, fetches are disjoint and together
// give back the plane, `last_o` marks the final one, and the number of fetch
// cycles equals an independent count (greedy in-order slice selection on
// 32-bit slices, first eight ones per slice) and is at least ceil(ones/8).
module tb_bitsift_ctrl;
  import flare_pkg::*;
  localparam int D = 256;
  logic clk = 0, rst_n = 0;
  logic load;
  logic [D-1:0] plane, wl;
  logic fetch, last, idle;
  logic [3:0] sawl;
  int checks = 0, failures = 0;

  bitsift_ctrl #(.D(D)) dut (.clk(clk), .rst_n(rst_n), .load_i(load), .plane_i(plane),
    .fetch_o(fetch), .wl_o(wl), .sawl_o(sawl), .last_o(last), .idle_o(idle));

  always #5 clk = ~clk;

  function automatic int ref_fetches(input logic [D-1:0] v);
    int n; logic [D-1:0] pend;
    pend = v; n = 0;
    while (pend != '0) begin
      int sum; bit stop;
      sum = 0; stop = 0;
      for (int s = 0; s < D/32; s++) begin
        logic [31:0] m; int c;
        m = '0; c = 0;
        for (int i = 0; i < 32; i++) if (pend[s*32+i] && c < 8) begin m[i] = 1; c++; end
        if (!stop && sum + c <= 8) begin sum += c; pend[s*32 +: 32] &= ~m; end
        else stop = 1;
      end
      n++;
    end
    return n;
  endfunction

  task automatic run_plane(input logic [D-1:0] v);
    logic [D-1:0] seen; int n, expn, cyc; bit bad;
    @(negedge clk); load = 1; plane = v;
    @(negedge clk); load = 0;
    seen = '0; n = 0; bad = 0; cyc = 0;
    while (!idle && cyc < 1000) begin
      if ((seen & wl) != '0) bad = 1;
      if ($countones(wl) < 1 || $countones(wl) > 8 || 4'($countones(wl)) != sawl) bad = 1;
      seen |= wl; n++;
      if (last != ((seen == v))) bad = 1;
      @(negedge clk); cyc++;
    end
    expn = ref_fetches(v);
    checks++;
    if (bad || seen != v || n != expn || n < ($countones(v) + 7) / 8) begin
      failures++;
      $display("FAIL ones=%0d fetches=%0d expected=%0d bad=%0b cover=%0b", $countones(v), n, expn, bad, seen == v);
    end
  endtask

  initial begin
    load = 0; plane = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_plane('0);
    run_plane('1);
    for (int k = 0; k < 300; k++) begin
      logic [D-1:0] v;
      for (int w = 0; w < D/32; w++) v[w*32 +: 32] = $urandom();
      case (k % 4)
        0: v = v & {D/32{$urandom()}} & {D/32{$urandom()}} & {D/32{$urandom()}};
        1: v = v & {D/32{$urandom()}};
        default: ;
      endcase
      run_plane(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
