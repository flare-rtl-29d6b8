// vdr_lut: parameter table of the VDR-Softmax. Holds, for every value of the
// accumulated exponent n_e, the integer constants {a, b, c, S, l} of the
// exponential approximation at that input scale: l is ln2 in input units, b
// and c the polynomial coefficients, a and S the output scale. Changing the
// entry is how the base of the exponential moves from e to the n-th root of e
// without touching the integer inputs.
//
// Size: 16 entries of 50 bits, 100 bytes as the paper states; the field widths
// (a 8, b 10, c 16, S 8, l 8 bits) and the clipping of n_e to the last entry are
// this design's choices. Contents are written once through the write port
// (computed off-line for a model); they reset to zero.
// Timing: write at the clock edge; read is combinational.
module vdr_lut
  import flare_pkg::*;
#(
  parameter int unsigned NE_W = 6
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              we_i,
  input  logic [$clog2(LUT_ENTRIES)-1:0]    waddr_i,
  input  vdr_param_t                        wdata_i,
  input  logic [NE_W-1:0]                   ne_i,
  output vdr_param_t                        param_o
);
  vdr_param_t tbl [LUT_ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < LUT_ENTRIES; i++) tbl[i] <= '0;
    end else if (we_i) begin
      tbl[waddr_i] <= wdata_i;
    end
  end

  always_comb begin
    if (ne_i >= NE_W'(LUT_ENTRIES)) param_o = tbl[LUT_ENTRIES-1];
    else                            param_o = tbl[ne_i[$clog2(LUT_ENTRIES)-1:0]];
  end
endmodule
