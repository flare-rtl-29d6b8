// ams_pim_array: behavioural model of one AMS-PiM array (MRAM-PiM for
// activation-weight products, 8T-SRAM-PiM for activation-activation products)
// with its dummy rows and its low-ENOB column ADCs.
//
// Behavioural model: the bit cells, the analog summation on the bit lines and
// the ADCs are analog circuits. What is modelled is their function under the
// design's own error bound: with at most eight word lines raised, the column
// current sum is read without error, so each column's ADC code equals the
// number of raised rows that store a one in that column (0..8, 4-bit code).
// The seven dummy rows hold off-cells only; their word lines load the column
// but add nothing, so the model only checks that the total number of raised
// word lines is exactly SAWL_MAX.
//
// Storage: ROWS rows by F*GW columns. Column f*GW+b holds bit b of element f
// of the row (LSB first, as in the array figures). Two write ports: a row
// write (the MRAM weight load, and the SRAM V cache where one token is one
// row) and a column-group write (the SRAM K cache, where one token is one
// group of GW columns across all rows).
//
// Timing: `cmp_i` with `wl_i` and `dummy_wl_i` in cycle t gives `adc_o` and
// `adc_valid_o` in cycle t+1. Writes take effect at the clock edge.
module ams_pim_array
  import flare_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned F    = 1024,
  parameter int unsigned GW   = 8
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // row write
  input  logic                               wr_row_en_i,
  input  logic [$clog2(ROWS)-1:0]            wr_row_addr_i,
  input  logic [F*GW-1:0]                    wr_row_data_i,
  // column-group write
  input  logic                               wr_col_en_i,
  input  logic [$clog2(F)-1:0]               wr_col_grp_i,
  input  logic [ROWS-1:0][GW-1:0]            wr_col_data_i,
  // compute
  input  logic                               cmp_i,
  input  logic [ROWS-1:0]                    wl_i,
  input  logic [DUMMY_ROWS-1:0]              dummy_wl_i,
  output logic [F*GW-1:0][ADC_W-1:0]         adc_o,
  output logic                               adc_valid_o
);
  localparam int unsigned COLS = F * GW;

  logic [COLS-1:0] mem [ROWS];

  // Rows raised in this fetch (at most SAWL_MAX are used).
  logic [SAWL_MAX-1:0][$clog2(ROWS)-1:0] act_row;
  logic [SAWL_MAX-1:0]                   act_vld;
  logic [$clog2(ROWS+1)-1:0]             n_real;

  always_comb begin
    int unsigned k;
    k       = 0;
    act_row = '0;
    act_vld = '0;
    n_real  = '0;
    for (int unsigned r = 0; r < ROWS; r++) begin
      if (wl_i[r]) begin
        n_real = n_real + 1'b1;
        if (k < SAWL_MAX) begin
          act_row[k] = ($clog2(ROWS))'(r);
          act_vld[k] = 1'b1;
          k          = k + 1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_row_en_i) mem[wr_row_addr_i] <= wr_row_data_i;
    if (wr_col_en_i) begin
      for (int unsigned r = 0; r < ROWS; r++)
        mem[r][wr_col_grp_i*GW +: GW] <= wr_col_data_i[r];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_valid_o <= 1'b0;
      adc_o       <= '0;
    end else begin
      adc_valid_o <= cmp_i;
      if (cmp_i) begin
        for (int unsigned c = 0; c < COLS; c++) begin
          logic [ADC_W-1:0] s;
          s = '0;
          for (int unsigned k = 0; k < SAWL_MAX; k++)
            s = s + ADC_W'(act_vld[k] & mem[act_row[k]][c]);
          adc_o[c] <= s;
        end
      end
    end
  end

  // The fixed-SAWL rule the ADC design relies on.
  a_fixed_sawl: assert property (@(posedge clk) disable iff (!rst_n)
    cmp_i |-> (n_real <= SAWL_MAX &&
               32'(n_real) + 32'($countones(dummy_wl_i)) == SAWL_MAX));
endmodule
