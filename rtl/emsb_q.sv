// emsb_q: effective-MSB quantiser (eMSB-Q). Requantises a group of wide signed
// integers to OUT_W-bit signed integers with one shared power-of-two scale,
// using only a search and a shift, no division.
//
// AUTO mode: for every element the bits below the sign that differ from the
// sign bit are ORed across the group; the highest such position is the
// group's effective MSB (for non-negative numbers the highest one, for
// negative numbers the highest zero). The group is then arithmetically
// shifted right by just enough that the effective MSB lands right under the
// output's sign bit, so the largest magnitude keeps OUT_W-1 significant bits
// and all ratios are kept to that precision. Groups that already fit are not
// shifted. FIXED mode (used for K and V, which must share one scale over all
// tokens): the shift comes from `fixed_shift_i` and results are saturated.
//
// The search and the sign/eMSB/Q-bit parse follow the eMSB-Q figure; the
// output is Q+1 bits as printed there. Truncation (no rounding) and the
// saturation in FIXED mode are this design's choices.
// Purely combinational; `shift_o` is the right shift applied, i.e. the
// power-of-two exponent that was removed from the group.
module emsb_q
  import flare_pkg::*;
#(
  parameter int unsigned N     = 64,
  parameter int unsigned IN_W  = 28,
  parameter int unsigned OUT_W = 9
) (
  input  logic [N-1:0][IN_W-1:0]       x_i,
  input  emsbq_mode_e                  mode_i,
  input  logic [$clog2(IN_W+1)-1:0]      fixed_shift_i,
  output logic [N-1:0][OUT_W-1:0]      q_o,
  output logic [$clog2(IN_W+1)-1:0]      shift_o
);
  localparam int unsigned SW = $clog2(IN_W+1);

  logic [IN_W-2:0] sig;       // ORed "differs from sign" bits
  logic [SW-1:0]   need;      // bits needed incl. sign
  logic [SW-1:0]   sh;

  always_comb begin
    sig = '0;
    for (int unsigned i = 0; i < N; i++)
      sig = sig | (x_i[i][IN_W-2:0] ^ {(IN_W-1){x_i[i][IN_W-1]}});
    need = SW'(1);
    for (int unsigned b = 0; b < IN_W-1; b++)
      if (sig[b]) need = SW'(b + 2);
    if (mode_i == EMSBQ_FIXED) sh = fixed_shift_i;
    else                       sh = (need > SW'(OUT_W)) ? SW'(need - SW'(OUT_W)) : '0;
    shift_o = sh;
    for (int unsigned i = 0; i < N; i++) begin
      logic signed [IN_W-1:0] v;
      v = $signed(x_i[i]) >>> sh;
      if (v > $signed(IN_W'((1 << (OUT_W-1)) - 1)))
        q_o[i] = {1'b0, {(OUT_W-1){1'b1}}};
      else if (v < -$signed(IN_W'(1 << (OUT_W-1))))
        q_o[i] = {1'b1, {(OUT_W-1){1'b0}}};
      else
        q_o[i] = v[OUT_W-1:0];
    end
  end
endmodule
