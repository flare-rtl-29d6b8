// tb_gpc: checks the global-pop controller. For random per-slice popcounts
// the enabled slices must be the longest prefix whose popcounts sum to at
// most eight, the output the AND of marked bits and enables, and the reported
// SAWL the sum of the enabled popcounts.
module tb_gpc;
  import flare_pkg::*;
  localparam int NS = 8;
  logic [NS-1:0][3:0]  pop;
  logic [NS-1:0][31:0] marked;
  logic [NS-1:0]       en;
  logic [NS*32-1:0]    wl;
  logic [3:0]          sawl;
  int checks = 0, failures = 0;

  gpc #(.NSLICE(NS), .W(32)) dut (.pop_i(pop), .marked_i(marked), .slice_en_o(en), .wl_o(wl), .sawl_o(sawl));

  initial begin
    for (int k = 0; k < 3000; k++) begin
      logic [NS-1:0] exp_en; logic [NS*32-1:0] exp_wl; int sum; bit stop;
      for (int s = 0; s < NS; s++) begin
        int n; logic [31:0] m;
        n = (k % 4 == 0) ? $urandom_range(0, 2) : $urandom_range(0, 8);
        m = '0;
        for (int j = 0; j < n; j++) m[j*3] = 1'b1;   // n ones in the slice
        pop[s] = 4'(n); marked[s] = m;
      end
      sum = 0; stop = 0; exp_en = '0; exp_wl = '0;
      for (int s = 0; s < NS; s++) begin
        if (!stop && sum + int'(pop[s]) <= 8) begin
          exp_en[s] = 1'b1; sum += int'(pop[s]); exp_wl[s*32 +: 32] = marked[s];
        end else stop = 1;
      end
      #1;
      checks++;
      if (en !== exp_en || wl !== exp_wl || sawl !== 4'(sum)) begin
        failures++;
        $display("FAIL en=%b exp=%b sawl=%0d exp=%0d", en, exp_en, sawl, sum);
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
