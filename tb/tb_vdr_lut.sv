// tb_vdr_lut: writes all 16 entries with random contents, reads every n_e
// back (n_e beyond the table must read the last entry), checks reset to zero.
module tb_vdr_lut;
  import flare_pkg::*;
  logic clk = 0, rst_n = 0, we;
  logic [3:0] waddr;
  vdr_param_t wdata, rd;
  logic [5:0] ne;
  vdr_param_t model [16];
  int checks = 0, failures = 0;

  vdr_lut #(.NE_W(6)) dut (.clk(clk), .rst_n(rst_n), .we_i(we), .waddr_i(waddr), .wdata_i(wdata), .ne_i(ne), .param_o(rd));
  always #5 clk = ~clk;

  initial begin
    we = 0; waddr = '0; wdata = '0; ne = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    ne = 6'd3; #1; checks++;
    if (rd != '0) begin failures++; $display("FAIL reset"); end
    for (int i = 0; i < 16; i++) begin
      we = 1; waddr = 4'(i);
      wdata = {$urandom(), $urandom()};
      model[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 64; n++) begin
      ne = 6'(n); #1;
      checks++;
      if (rd != model[(n > 15) ? 15 : n]) begin failures++; $display("FAIL ne=%0d", n); end
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
