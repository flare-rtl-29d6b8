// lpc_slice: local-pop controller (LPC) for one fixed-length slice of a
// bit-serial input plane.
//
// The pop detector walks the slice from bit 0 upward and counts the ones; the
// pop marker keeps every bit up to and including the SAWL_MAX-th one and clears
// the rest, so the marked part never holds more than SAWL_MAX ones. The
// popcount of the marked part (0..SAWL_MAX) goes to the global-pop controller.
// `dense` says the slice held more ones than were marked, so it will need a
// further fetch. The slice width (32), the limit of eight ones and the
// 4-bit popcount follow the BitSift controller figure; scanning from bit 0 is
// this design's reading of "from the beginning of the slice".
// Purely combinational.
module lpc_slice
  import flare_pkg::*;
#(
  parameter int unsigned W = SLICE_W
) (
  input  logic [W-1:0]    bits_i,     // pending ones of this slice
  output logic [W-1:0]    marked_o,   // pop-marker output: first <=8 ones
  output logic [PC_W-1:0] pop_o,      // popcount of marked_o (0..8)
  output logic            dense_o     // ones remain beyond the marked part
);
  always_comb begin
    logic [PC_W:0] cnt;
    cnt      = '0;
    marked_o = '0;
    dense_o  = 1'b0;
    for (int unsigned i = 0; i < W; i++) begin
      if (bits_i[i]) begin
        if (cnt < (PC_W+1)'(SAWL_MAX)) begin
          marked_o[i] = 1'b1;
          cnt         = cnt + 1'b1;
        end else begin
          dense_o = 1'b1;
        end
      end
    end
    pop_o = cnt[PC_W-1:0];
  end
endmodule
