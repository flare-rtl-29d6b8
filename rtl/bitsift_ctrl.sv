// bitsift_ctrl: BitSift-GEMV controller. Turns one bit plane of an input
// vector into a sequence of word-line fetches, each holding at most SAWL_MAX
// ones, skipping every zero bit.
//
// The plane is cut into 32-bit slices. Each slice has a local-pop controller
// (lpc_slice) that marks its first eight pending ones; the global-pop
// controller (gpc) enables the longest run of slices, from the lowest one
// that still has pending ones, whose marked ones add up to at most eight. The
// enabled bits are the fetch; they are cleared from the pending register and
// the next cycle works on what is left. A slice with more than eight ones is
// therefore fetched in several parts, as the pop marker describes.
//
// Interface and timing: `load_i` copies `plane_i` into the pending register.
// From the next cycle on, while anything is pending, `fetch_o` is high for one
// cycle per fetch with `wl_o` (the real word lines) and `sawl_o` (how many of
// them); `last_o` marks the fetch that empties the plane. `idle_o` is high when nothing is pending; an all-zero plane costs no
// fetch. A fetch and a load in the same cycle: the load wins. The number of
// fetches is at least ceil(ones/8), which the paper gives as the latency.
module bitsift_ctrl
  import flare_pkg::*;
#(
  parameter int unsigned D = 1024
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load_i,
  input  logic [D-1:0]    plane_i,
  output logic            fetch_o,
  output logic [D-1:0]    wl_o,
  output logic [PC_W-1:0] sawl_o,
  output logic            last_o,
  output logic            idle_o
);
  localparam int unsigned NS = (D + SLICE_W - 1) / SLICE_W;
  localparam int unsigned DP = NS * SLICE_W;

  logic [DP-1:0]                  pending_q;
  logic [NS-1:0][SLICE_W-1:0]     marked;
  logic [NS-1:0][PC_W-1:0]        pop;
  logic [NS-1:0]                  dense;
  logic [NS-1:0]                  slice_en;
  logic [DP-1:0]                  wl_full;

  for (genvar s = 0; s < NS; s++) begin : g_lpc
    lpc_slice #(.W(SLICE_W)) u_lpc (
      .bits_i  (pending_q[s*SLICE_W +: SLICE_W]),
      .marked_o(marked[s]),
      .pop_o   (pop[s]),
      .dense_o (dense[s])
    );
  end

  gpc #(.NSLICE(NS), .W(SLICE_W)) u_gpc (
    .pop_i     (pop),
    .marked_i  (marked),
    .slice_en_o(slice_en),
    .wl_o      (wl_full),
    .sawl_o    (sawl_o)
  );

  assign idle_o  = (pending_q == '0);
  assign fetch_o = !idle_o;
  assign wl_o    = wl_full[D-1:0];
  assign last_o  = fetch_o && ((pending_q & ~wl_full) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending_q <= '0;
    end else if (load_i) begin
      pending_q <= DP'(plane_i);
    end else if (fetch_o) begin
      pending_q <= pending_q & ~wl_full;
    end
  end

  // A fetch never exceeds the fixed SAWL and always makes progress.
  a_sawl_bound: assert property (@(posedge clk) disable iff (!rst_n)
    fetch_o |-> (sawl_o <= PC_W'(SAWL_MAX) && sawl_o != 0));

  // `dense` is informative only: a dense slice shows up as extra fetches.
  logic unused_dense;
  assign unused_dense = ^dense;
endmodule
