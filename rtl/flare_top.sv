// flare_top: the FLARE PE array. NUM_PE independent FLARE PEs, each holding
// the weights of one attention layer, so that several layers of an encoder
// are resident on chip at once and run on separate token streams.
//
// Every PE has its own configuration, weight-load, token-in and token-out
// ports; the top only bundles them as arrays indexed by PE. The paper gives
// sixteen PEs "for multi-layer processing" but no interconnect between them
// (the feed-forward blocks between attention layers are outside this
// design), so none is invented here: chaining PEs is left to the system.
// Timing per PE is that of flare_pe.
module flare_top
  import flare_pkg::*;
#(
  parameter int unsigned NUM_PE = 16,
  parameter int unsigned D      = 1024,
  parameter int unsigned N      = 512,
  parameter int unsigned H      = 16,
  parameter int unsigned WBP    = 8,
  parameter int unsigned XBP    = 8,
  parameter int unsigned ABP    = 9,
  parameter int unsigned ACC_W  = 28,
  parameter int unsigned NE_W   = 6
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic [NUM_PE-1:0][$clog2(ACC_W+1)-1:0]        kv_shift_i,
  input  logic [NUM_PE-1:0][NE_W-1:0]                   x_ne_i,
  input  logic [NUM_PE-1:0]                             w_we_i,
  input  logic [1:0]                                    w_sel_i,
  input  logic [$clog2(D)-1:0]                          w_row_i,
  input  logic [D*WBP-1:0]                              w_data_i,
  input  logic [NUM_PE-1:0]                             lut_we_i,
  input  logic [$clog2(LUT_ENTRIES)-1:0]                lut_addr_i,
  input  vdr_param_t                                    lut_data_i,
  input  logic [NUM_PE-1:0]                             start_i,
  output logic [NUM_PE-1:0]                             busy_o,
  output logic [NUM_PE-1:0]                             done_o,
  input  logic [NUM_PE-1:0]                             tok_valid_i,
  output logic [NUM_PE-1:0]                             tok_ready_o,
  input  logic [NUM_PE-1:0][D-1:0][XBP-1:0]             tok_i,
  output logic [NUM_PE-1:0]                             out_valid_o,
  input  logic [NUM_PE-1:0]                             out_ready_i,
  output logic [NUM_PE-1:0][D-1:0][ABP-1:0]             out_o,
  output logic [NUM_PE-1:0][NE_W-1:0]                   out_exp_o
);
  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    flare_pe #(
      .D(D), .N(N), .H(H), .DK(D/H), .WBP(WBP), .XBP(XBP), .ABP(ABP),
      .ACC_W(ACC_W), .NE_W(NE_W)
    ) u_pe (
      .clk        (clk),
      .rst_n      (rst_n),
      .kv_shift_i (kv_shift_i[p]),
      .x_ne_i     (x_ne_i[p]),
      .w_we_i     (w_we_i[p]),
      .w_sel_i    (w_sel_i),
      .w_row_i    (w_row_i),
      .w_data_i   (w_data_i),
      .lut_we_i   (lut_we_i[p]),
      .lut_addr_i (lut_addr_i),
      .lut_data_i (lut_data_i),
      .start_i    (start_i[p]),
      .busy_o     (busy_o[p]),
      .done_o     (done_o[p]),
      .tok_valid_i(tok_valid_i[p]),
      .tok_ready_o(tok_ready_o[p]),
      .tok_i      (tok_i[p]),
      .out_valid_o(out_valid_o[p]),
      .out_ready_i(out_ready_i[p]),
      .out_o      (out_o[p]),
      .out_exp_o  (out_exp_o[p])
    );
  end
endmodule
