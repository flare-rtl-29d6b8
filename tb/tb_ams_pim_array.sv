// tb_ams_pim_array: fills a small array through both write ports (rows, then
// some column groups overwritten), then raises random sets of 1..8 word lines
// padded with dummy lines to eight, and checks every column's ADC code
// against a popcount of the stored bits kept in the testbench, one cycle
// after the compute request.
module tb_ams_pim_array;
  import flare_pkg::*;
  localparam int ROWS = 24, F = 4, GW = 5, COLS = F*GW;
  logic clk = 0, rst_n = 0;
  logic wr_row_en, wr_col_en, cmp, adc_valid;
  logic [$clog2(ROWS)-1:0] wr_row_addr;
  logic [COLS-1:0] wr_row_data;
  logic [$clog2(F)-1:0] wr_col_grp;
  logic [ROWS-1:0][GW-1:0] wr_col_data;
  logic [ROWS-1:0] wl;
  logic [6:0] dwl;
  logic [COLS-1:0][3:0] adc;
  logic [COLS-1:0] model [ROWS];
  int checks = 0, failures = 0;

  ams_pim_array #(.ROWS(ROWS), .F(F), .GW(GW)) dut (
    .clk(clk), .rst_n(rst_n), .wr_row_en_i(wr_row_en), .wr_row_addr_i(wr_row_addr), .wr_row_data_i(wr_row_data),
    .wr_col_en_i(wr_col_en), .wr_col_grp_i(wr_col_grp), .wr_col_data_i(wr_col_data),
    .cmp_i(cmp), .wl_i(wl), .dummy_wl_i(dwl), .adc_o(adc), .adc_valid_o(adc_valid));

  always #5 clk = ~clk;

  initial begin
    wr_row_en = 0; wr_col_en = 0; cmp = 0; wl = '0; dwl = '0;
    wr_row_addr = '0; wr_row_data = '0; wr_col_grp = '0; wr_col_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_row_en = 1; wr_row_addr = r[$clog2(ROWS)-1:0]; wr_row_data = COLS'($urandom());
      model[r] = wr_row_data;
    end
    @(negedge clk); wr_row_en = 0;
    for (int g = 0; g < F; g += 2) begin
      wr_col_en = 1; wr_col_grp = g[$clog2(F)-1:0];
      for (int r = 0; r < ROWS; r++) begin
        wr_col_data[r] = GW'($urandom());
        model[r][g*GW +: GW] = wr_col_data[r];
      end
      @(negedge clk);
    end
    wr_col_en = 0;
    for (int k = 0; k < 500; k++) begin
      int n;
      n = $urandom_range(1, 8);
      wl = '0;
      while ($countones(wl) < n) wl[$urandom_range(0, ROWS-1)] = 1'b1;
      dwl = '0;
      for (int d = 0; d < 8 - n; d++) dwl[d] = 1'b1;
      cmp = 1;
      @(negedge clk);
      cmp = 0;
      checks++;
      if (!adc_valid) begin failures++; $display("FAIL adc_valid low"); end
      for (int c = 0; c < COLS; c++) begin
        int e; e = 0;
        for (int r = 0; r < ROWS; r++) if (wl[r] && model[r][c]) e++;
        checks++;
        if (adc[c] !== 4'(e)) begin
          failures++;
          $display("FAIL col %0d adc=%0d exp=%0d", c, adc[c], e);
        end
      end
      @(negedge clk);
      checks++;
      if (adc_valid) begin failures++; $display("FAIL adc_valid stuck"); end
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
