// flare_pkg: constants and small types shared by the FLARE attention PE.
//
// The numbers that come from the design description are the fixed number of
// simultaneously activated word lines (8), the 32-bit local-pop slice, the
// seven dummy rows at the bottom of every array, the 4-bit per-slice popcount,
// 8-bit weights with (Q+1)-bit eMSB-quantised activations, the 24-bit iEXP
// datapath and the 100-byte softmax parameter table. The LUT field split, the
// accumulator width and the phase encoding are this implementation's choices.
package flare_pkg;

  // Fixed SAWL: every analog column sum sees exactly this many active WLs.
  localparam int unsigned SAWL_MAX   = 8;
  // Dummy rows (all off-cells) used to pad a fetch up to SAWL_MAX.
  localparam int unsigned DUMMY_ROWS = SAWL_MAX - 1;
  // Width of one local-pop-controller slice of the input vector.
  localparam int unsigned SLICE_W    = 32;
  // Per-slice popcount width (0..8).
  localparam int unsigned PC_W       = 4;
  // ADC code width: a column sum is 0..SAWL_MAX, so 4 bits suffice.
  localparam int unsigned ADC_W      = 4;

  // VDR-Softmax parameter table: 16 entries x 50 bits = 100 bytes.
  localparam int unsigned LUT_ENTRIES = 16;
  localparam int unsigned LUT_A_W = 8;
  localparam int unsigned LUT_B_W = 10;
  localparam int unsigned LUT_C_W = 16;
  localparam int unsigned LUT_S_W = 8;
  localparam int unsigned LUT_L_W = 8;

  // Width of the iEXP integer datapath.
  localparam int unsigned EXP_W = 24;

  typedef struct packed {
    logic [LUT_A_W-1:0] a;
    logic [LUT_B_W-1:0] b;
    logic [LUT_C_W-1:0] c;
    logic [LUT_S_W-1:0] s;
    logic [LUT_L_W-1:0] l;
  } vdr_param_t;

  // How eMSB-Q picks its shift.
  typedef enum logic {
    EMSBQ_AUTO  = 1'b0,   // per group: shift so the effective MSB lands on the top output bit
    EMSBQ_FIXED = 1'b1    // K/V: shift fixed by configuration, saturate on overflow
  } emsbq_mode_e;

  // Top-level sequencer of one PE.
  typedef enum logic [3:0] {
    PE_IDLE,
    PE_KV_WAIT,     // wait for an input token in the K/V pass
    PE_KV_GEMV,     // W_K and W_V projections running
    PE_KV_WRITE,    // quantise K,V and write them into the SRAM arrays
    PE_Q_WAIT,      // wait for an input token in the fused pass
    PE_Q_GEMV,      // W_Q projection
    PE_L_GEMV,      // L = Q K^T on every head
    PE_SOFTMAX,     // VDR-Softmax, one head at a time
    PE_A_GEMV,      // A = S V on every head
    PE_O_GEMV,      // output projection
    PE_OUT,         // hand the output token out
    PE_DONE
  } pe_state_e;

endpackage
