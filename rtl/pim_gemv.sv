// pim_gemv: one bit-serial BitSift GEMV engine: an AMS-PiM array with its
// BitSift-GEMV controller, SAWL_D controller and SHIFT/ADD unit.
//
// A GEMV y = x * W multiplies a ROWS-long vector of ABP-bit two's-complement
// activations by the ROWS x F matrix stored in the array. The activations
// are fed one bit plane at a time, MSB (the sign plane) first. Every plane is
// handed to the BitSift controller, which fetches only its ones, at most
// eight at a time; the SAWL_D controller raises dummy rows so that every
// fetch activates exactly eight word lines; the array returns one ADC code
// per column; SHIFT/ADD weights the codes by the plane position and the
// stored bit position. An all-zero plane is skipped at once.
//
// Timing: `start_i` in the IDLE state latches `act_i` and clears the
// accumulators. Each non-zero plane then costs one load cycle plus one cycle
// per fetch, a zero plane one cycle, and two more cycles drain the pipeline:
// `done_o` rises sum_p(1 + fetches_p) + 2 cycles after `start_i`, and `acc_o`
// holds the result from then until the next start. `fetches_o` counts the
// fetches of the last GEMV. The array's write ports are brought out as they
// are.
module pim_gemv
  import flare_pkg::*;
#(
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned F     = 1024,
  parameter int unsigned GW    = 8,
  parameter int unsigned ABP   = 9,
  parameter int unsigned ACC_W = 28
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start_i,
  input  logic [ROWS-1:0][ABP-1:0]     act_i,
  output logic                         busy_o,
  output logic                         done_o,
  output logic [F-1:0][ACC_W-1:0]      acc_o,
  output logic [31:0]                  fetches_o,
  // array write ports
  input  logic                         wr_row_en_i,
  input  logic [$clog2(ROWS)-1:0]      wr_row_addr_i,
  input  logic [F*GW-1:0]              wr_row_data_i,
  input  logic                         wr_col_en_i,
  input  logic [$clog2(F)-1:0]         wr_col_grp_i,
  input  logic [ROWS-1:0][GW-1:0]      wr_col_data_i
);
  localparam int unsigned PBITS = $clog2(ABP);

  typedef enum logic [2:0] {G_IDLE, G_LOAD, G_RUN, G_DRAIN, G_DONE} gstate_e;
  gstate_e state_q;

  logic [ROWS-1:0][ABP-1:0] act_q;
  logic [PBITS-1:0]         plane_q, plane_d;
  logic                     neg_d;
  logic [ROWS-1:0]          plane_bits;
  logic                     bs_load, bs_fetch, bs_last, bs_idle;
  logic [ROWS-1:0]          wl;
  logic [PC_W-1:0]          bs_sawl;
  logic [DUMMY_ROWS-1:0]    dummy_wl;
  logic [PC_W-1:0]          sd_sawl, sd_total;
  logic                     cmp;
  logic [F*GW-1:0][ADC_W-1:0] adc;
  logic                     adc_valid;

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) plane_bits[r] = act_q[r][plane_q];
  end

  assign bs_load = (state_q == G_LOAD) && (plane_bits != '0);
  assign cmp     = (state_q == G_RUN) && bs_fetch;

  bitsift_ctrl #(.D(ROWS)) u_bitsift (
    .clk    (clk),
    .rst_n  (rst_n),
    .load_i (bs_load),
    .plane_i(plane_bits),
    .fetch_o(bs_fetch),
    .wl_o   (wl),
    .sawl_o (bs_sawl),
    .last_o (bs_last),
    .idle_o (bs_idle)
  );

  sawl_d_ctrl #(.ROWS(ROWS)) u_sawl_d (
    .wl_i      (wl),
    .dummy_wl_o(dummy_wl),
    .sawl_o    (sd_sawl),
    .total_o   (sd_total)
  );

  ams_pim_array #(.ROWS(ROWS), .F(F), .GW(GW)) u_array (
    .clk          (clk),
    .rst_n        (rst_n),
    .wr_row_en_i  (wr_row_en_i),
    .wr_row_addr_i(wr_row_addr_i),
    .wr_row_data_i(wr_row_data_i),
    .wr_col_en_i  (wr_col_en_i),
    .wr_col_grp_i (wr_col_grp_i),
    .wr_col_data_i(wr_col_data_i),
    .cmp_i        (cmp),
    .wl_i         (wl),
    .dummy_wl_i   (dummy_wl),
    .adc_o        (adc),
    .adc_valid_o  (adc_valid)
  );

  shift_add #(.F(F), .GW(GW), .PBITS(PBITS), .ACC_W(ACC_W)) u_shift_add (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr_i  (state_q == G_IDLE && start_i),
    .add_i  (adc_valid),
    .adc_i  (adc),
    .plane_i(plane_d),
    .neg_i  (neg_d),
    .acc_o  (acc_o)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= G_IDLE;
      act_q     <= '0;
      plane_q   <= '0;
      plane_d   <= '0;
      neg_d     <= 1'b0;
      fetches_o <= '0;
    end else begin
      plane_d <= plane_q;
      neg_d   <= (32'(plane_q) == ABP-1);
      unique case (state_q)
        G_IDLE: if (start_i) begin
          act_q     <= act_i;
          plane_q   <= PBITS'(ABP-1);
          fetches_o <= '0;
          state_q   <= G_LOAD;
        end
        G_LOAD: begin
          if (plane_bits != '0)  state_q <= G_RUN;
          else if (plane_q == 0) state_q <= G_DRAIN;
          else                   plane_q <= plane_q - 1'b1;
        end
        G_RUN: begin
          if (cmp) fetches_o <= fetches_o + 1;
          if (bs_last || bs_idle) begin
            if (plane_q == 0) state_q <= G_DRAIN;
            else begin
              plane_q <= plane_q - 1'b1;
              state_q <= G_LOAD;
            end
          end
        end
        G_DRAIN: state_q <= G_DONE;
        G_DONE:  state_q <= G_IDLE;
        default: state_q <= G_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != G_IDLE);
  assign done_o = (state_q == G_DONE);

  a_sawl_match: assert property (@(posedge clk) disable iff (!rst_n)
    cmp |-> (sd_sawl == bs_sawl && sd_total == PC_W'(SAWL_MAX)));
endmodule
