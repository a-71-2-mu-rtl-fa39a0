// rsnn_pkg: types and constants shared by the recurrent spiking neural
// network (RSNN) speech accelerator.
//
// The network is two 128-neuron recurrent spiking layers followed by a
// 128 -> 1920 fully connected (FC) layer, with 40 8-bit input features per
// 10 ms frame, 4-bit signed weights and 12-bit accumulators. These sizes are
// the published ones. The enumerations below (layer phases, zero-skipping
// modes, weight sources) and the control register layout are this design's
// own encodings.
// Not every module uses every constant, so verilator lists the unused ones
// per module (UNUSEDPARAM); that is expected for a shared package.
package rsnn_pkg;

  // Published sizes.
  localparam int unsigned WBITS   = 4;    // weight width (signed fixed point)
  localparam int unsigned ACCW    = 12;   // PE accumulator / membrane width
  localparam int unsigned INBITS  = 8;    // input feature width
  localparam int unsigned GRP     = 8;    // spikes handled per zero-skip group
  localparam int unsigned SHW     = 3;    // shift value width (0..7)
  localparam int unsigned BUSW    = 128;  // internal load bus width

  // Layer phases of the frame loop (Fig. 7 of the source publication).
  typedef enum logic [3:0] {
    ST_START      = 4'd0,
    ST_LOAD_INSTR = 4'd1,
    ST_LOAD_W     = 4'd2,
    ST_LOAD_IN    = 4'd3,
    ST_L0_INPUT   = 4'd4,
    ST_L0_REC     = 4'd5,
    ST_L1_FF      = 4'd6,
    ST_L1_REC     = 4'd7,
    ST_FC         = 4'd8
  } state_e;

  // Zero-skipping configurations (types A-D).
  typedef enum logic [1:0] {
    ZS_A = 2'd0,   // input feature bits, shift = bit position
    ZS_B = 2'd1,   // single time step spikes, shift = 0
    ZS_C = 2'd2,   // merged spikes of two time steps, shift = A AND B
    ZS_D = 2'd3    // two time steps in recurrent layers, no skipping
  } zs_mode_e;

  // Which weight buffer drives a PE set.
  typedef enum logic [2:0] {
    WS_IN  = 3'd0,  // input weight buffer (48 x 512)
    WS_SP0 = 3'd1,  // spike weight buffer 1 (spike inputs 0..63)
    WS_SP1 = 3'd2,  // spike weight buffer 2 (spike inputs 64..127)
    WS_FC1 = 3'd3,  // FC weight buffer 1
    WS_FC2 = 3'd4   // FC weight buffer 2
  } wsrc_e;

  // Load bus targets, address bits [14:12].
  typedef enum logic [2:0] {
    LT_INBUF = 3'd0,
    LT_WIN   = 3'd1,
    LT_WSP0  = 3'd2,
    LT_WSP1  = 3'd3,
    LT_WFC1  = 3'd4,
    LT_WFC2  = 3'd5
  } ld_target_e;

  // Run configuration held by the 32-bit control register.
  typedef struct packed {
    logic       two_ts;      // 1: two time steps, 0: one time step
    logic [2:0] beta_sh0;    // layer 0 decay beta = 2^-beta_sh0
    logic [2:0] beta_sh1;    // layer 1 decay beta = 2^-beta_sh1
    logic [3:0] vth_exp0;    // layer 0 threshold Vth = 2^vth_exp0
    logic [3:0] vth_exp1;    // layer 1 threshold Vth = 2^vth_exp1
  } cfg_t;

  // Saturating add of two ACCW-bit signed values.
  function automatic logic signed [ACCW-1:0] sat_add(
      input logic signed [ACCW-1:0] a, input logic signed [ACCW-1:0] b);
    logic signed [ACCW:0] s;
    s = {a[ACCW-1], a} + {b[ACCW-1], b};
    if (s[ACCW] != s[ACCW-1])
      return s[ACCW] ? {1'b1, {(ACCW-1){1'b0}}} : {1'b0, {(ACCW-1){1'b1}}};
    return s[ACCW-1:0];
  endfunction

endpackage
