// shift_add: the fused SHIFT/ADD arithmetic under an AMS-PiM array. It turns
// the per-column ADC codes of successive fetches into F signed dot products.
//
// Each element f owns GW adjacent columns, one per bit of a two's-complement
// stored operand (LSB first). A fetch's contribution to element f is
// sum_b code[f][b] * 2^b, with the top bit weighted -2^(GW-1). That partial
// is shifted left by the position of the activation bit plane being fetched
// and added to the accumulator, or subtracted when the plane is the sign bit
// of a two's-complement activation. After all planes and fetches the
// accumulator holds sum_rows x[row] * w[row][f] exactly.
//
// Shift-and-add of column popcounts is what the paper names; the two's
// complement handling and the accumulator width are this design's choices.
//
// Timing: `clr_i` zeroes all accumulators at the clock edge; `add_i` with
// `adc_i`, `plane_i` and `neg_i` accumulates at the clock edge. `acc_o` is the
// register contents.
module shift_add
  import flare_pkg::*;
#(
  parameter int unsigned F     = 1024,
  parameter int unsigned GW    = 8,
  parameter int unsigned PBITS = 4,     // width of the plane index
  parameter int unsigned ACC_W = 28
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr_i,
  input  logic                          add_i,
  input  logic [F*GW-1:0][ADC_W-1:0]    adc_i,
  input  logic [PBITS-1:0]              plane_i,
  input  logic                          neg_i,
  output logic [F-1:0][ACC_W-1:0]       acc_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_o <= '0;
    end else if (clr_i) begin
      acc_o <= '0;
    end else if (add_i) begin
      for (int unsigned f = 0; f < F; f++) begin
        logic signed [ACC_W-1:0] p;
        p = '0;
        for (int unsigned b = 0; b < GW; b++) begin
          if (b == GW-1) p = p - (ACC_W'(adc_i[f*GW+b]) << b);
          else           p = p + (ACC_W'(adc_i[f*GW+b]) << b);
        end
        p = p <<< plane_i;
        acc_o[f] <= neg_i ? acc_o[f] - p : acc_o[f] + p;
      end
    end
  end
endmodule
