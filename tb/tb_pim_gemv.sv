// tb_pim_gemv: checks one BitSift GEMV engine (ROWS=72, F=5, GW=8, ABP=9).
// Random signed 8-bit weights are written row by row, then column group 2 is
// overwritten through the column port. 60 GEMVs with random 9-bit
// activations of varying density (all-zero, sparse, dense) are run; for each,
// every accumulator is compared with an integer matrix-vector product and
// the start-to-done latency and the fetch count are compared with the
// BitSift cycle model of flare_ref_pkg. A start while busy must be ignored.
module tb_pim_gemv;
  import flare_ref_pkg::*;
  localparam int ROWS = 72, F = 5, GW = 8, ABP = 9, ACC_W = 28;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [ROWS-1:0][ABP-1:0] act;
  logic [F-1:0][ACC_W-1:0]  acc;
  logic [31:0] fetches;
  logic wr_row_en = 0, wr_col_en = 0;
  logic [$clog2(ROWS)-1:0] wr_row_addr = '0;
  logic [F*GW-1:0] wr_row_data = '0;
  logic [$clog2(F)-1:0] wr_col_grp = '0;
  logic [ROWS-1:0][GW-1:0] wr_col_data = '0;
  int checks = 0, failures = 0;

  pim_gemv #(.ROWS(ROWS), .F(F), .GW(GW), .ABP(ABP), .ACC_W(ACC_W)) dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .act_i(act), .busy_o(busy), .done_o(done),
    .acc_o(acc), .fetches_o(fetches),
    .wr_row_en_i(wr_row_en), .wr_row_addr_i(wr_row_addr), .wr_row_data_i(wr_row_data),
    .wr_col_en_i(wr_col_en), .wr_col_grp_i(wr_col_grp), .wr_col_data_i(wr_col_data));

  always #5 clk = ~clk;

  flare_ref_pkg::mat_t W;

  initial begin
    W = new[ROWS];
    foreach (W[r]) begin
      W[r] = new[F];
      foreach (W[r][f]) W[r][f] = longint'($signed(8'($urandom())));
    end
    act = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      wr_row_en = 1; wr_row_addr = 7'(r);
      for (int f = 0; f < F; f++) wr_row_data[f*GW +: GW] = 8'(W[r][f]);
      @(negedge clk);
    end
    wr_row_en = 0;
    wr_col_en = 1; wr_col_grp = 3'd2;
    for (int r = 0; r < ROWS; r++) begin
      W[r][2] = longint'($signed(8'($urandom())));
      wr_col_data[r] = 8'(W[r][2]);
    end
    @(negedge clk); wr_col_en = 0;

    for (int it = 0; it < 60; it++) begin
      flare_ref_pkg::vec_t x, y;
      int dens, cyc, fe;
      dens = (it == 0) ? 0 : (it % 3 == 0) ? 100 : $urandom_range(1, 30);
      x = new[ROWS];
      foreach (x[r]) begin
        x[r] = ($urandom_range(1, 100) <= dens) ? longint'($signed(9'($urandom()))) : 0;
        if (it % 5 == 1 && x[r] < 0) x[r] = -x[r] >>> 3;
        act[r] = 9'(x[r]);
      end
      y = gemv(x, W, F);
      fe = 0;
      for (int p = 0; p < ABP; p++) begin
        bit pl [];
        pl = new[ROWS];
        foreach (pl[r]) pl[r] = x[r][p];
        fe += bitsift_fetches(pl);
      end
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      // a second start while busy is ignored
      start = 1; @(negedge clk); start = 0; cyc++;
      act = '1;
      while (!done) begin @(negedge clk); cyc++; if (cyc > 5000) break; end
      checks++;
      if (cyc != gemv_cycles(x, ABP)) begin
        failures++; $display("FAIL gemv %0d latency %0d expected %0d", it, cyc, gemv_cycles(x, ABP));
      end
      checks++;
      if (int'(fetches) != fe) begin failures++; $display("FAIL gemv %0d fetches %0d expected %0d", it, fetches, fe); end
      for (int f = 0; f < F; f++) begin
        checks++;
        if (longint'($signed(acc[f])) != y[f]) begin
          failures++; $display("FAIL gemv %0d col %0d acc %0d expected %0d", it, f, $signed(acc[f]), y[f]);
        end
      end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
