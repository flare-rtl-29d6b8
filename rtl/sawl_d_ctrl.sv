// sawl_d_ctrl: SAWL_D controller, keeps the number of simultaneously activated
// word lines fixed at SAWL_MAX.
//
// It counts the ones of the word-line vector of a fetch (SAWL) and raises
// SAWL_D = SAWL_MAX - SAWL of the dummy word lines, filled from dummy row 0
// upward. The dummy rows sit at the bottom of the array and hold only
// off-cells, so they change the analog load but never the column sums. With
// no real WL active nothing is raised (an empty fetch is never issued). The
// seven dummy rows and the rule SAWL_D = 8 - SAWL follow the SAWL_D figure;
// the thermometer fill order is this design's choice. `total_o` is the number
// of WLs raised, always SAWL_MAX for a non-empty fetch of at most SAWL_MAX ones.
// Purely combinational.
module sawl_d_ctrl
  import flare_pkg::*;
#(
  parameter int unsigned ROWS = 1024
) (
  input  logic [ROWS-1:0]       wl_i,        // real word lines of this fetch
  output logic [DUMMY_ROWS-1:0] dummy_wl_o,  // dummy word lines
  output logic [PC_W-1:0]       sawl_o,      // real WLs active (clipped to 15)
  output logic [PC_W-1:0]       total_o      // real + dummy WLs active
);
  logic [$clog2(ROWS+1)-1:0] cnt;
  logic [PC_W-1:0]           nd;

  always_comb begin
    cnt = '0;
    for (int unsigned r = 0; r < ROWS; r++) cnt = cnt + wl_i[r];
    sawl_o = (cnt > 15) ? 4'd15 : cnt[PC_W-1:0];
    nd     = (cnt == 0 || cnt >= SAWL_MAX) ? '0 : PC_W'(SAWL_MAX - cnt);
    for (int unsigned d = 0; d < DUMMY_ROWS; d++) dummy_wl_o[d] = (d < nd);
    total_o = sawl_o + nd;
  end
endmodule
