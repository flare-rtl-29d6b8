// gpc: global-pop controller of the BitSift-GEMV controller.
//
// It takes the per-slice popcounts of the local-pop controllers and the ctq
// (compute-token queue) decides which slices are fetched this cycle: starting
// from slice 0 it enables slices while the running sum of their popcounts
// stays at or under SAWL_MAX, and stops at the first slice that would push it
// over, so the fetched bits form one contiguous stretch of the vector. The
// global popcount adder sums the enabled popcounts; that sum is the SAWL of
// the fetch. The MASK gating of the figure is the AND of each slice's marked
// bits with its slice_enable. A slice whose popcount is zero is always enabled
// (it adds nothing). Inputs, slice_enable and popcount widths are those printed
// in the BitSift controller figure; the in-order greedy choice is this
// design's reading of "the longest slice containing eight ones".
// Purely combinational.
module gpc
  import flare_pkg::*;
#(
  parameter int unsigned NSLICE = 32,
  parameter int unsigned W      = SLICE_W
) (
  input  logic [NSLICE-1:0][PC_W-1:0] pop_i,        // from each LPC
  input  logic [NSLICE-1:0][W-1:0]    marked_i,     // from each LPC
  output logic [NSLICE-1:0]           slice_en_o,   // ctq output
  output logic [NSLICE*W-1:0]         wl_o,         // gated (MASKed) output to the WLs
  output logic [PC_W-1:0]             sawl_o        // global popcount of the fetch
);
  always_comb begin
    logic [PC_W+5:0] sum;
    logic            stop;
    sum  = '0;
    stop = 1'b0;
    for (int unsigned s = 0; s < NSLICE; s++) begin
      slice_en_o[s] = 1'b0;
      if (!stop) begin
        if (sum + pop_i[s] <= (PC_W+6)'(SAWL_MAX)) begin
          slice_en_o[s] = 1'b1;
          sum           = sum + pop_i[s];
        end else begin
          stop = 1'b1;
        end
      end
      wl_o[s*W +: W] = marked_i[s] & {W{slice_en_o[s]}};
    end
    sawl_o = sum[PC_W-1:0];
  end
endmodule
