// sata_pkg: types and constants shared by the SATA training accelerator.
//
// Number format: every 8-bit quantity that carries a real value (weights W,
// membrane potentials U, potential gradients dU, backpropagated gradients dH,
// weight gradients dW) is a signed Q3.4 fixed-point number (4 fractional bits,
// range -8 .. +7.9375). Spikes are single bits; the T = 8 spikes of one neuron
// are packed into one byte (bit t = spike at timestep t).
//
// The defaults below are the configuration of the main design point: 8-bit
// data, T = 8 timesteps, firing threshold 0.75, firing width 2.5 and leak
// factor 0.94 (approximated by 1 - 2^-4 = 0.9375). The fixed-point format and
// the shift-based approximations of alpha and 1/beta are this design's choice.
package sata_pkg;

  localparam int unsigned DATA_W      = 8;     // bit width of W, U, dU, dH
  localparam int unsigned T_DEF       = 8;     // timesteps
  localparam int unsigned FRAC_DEF    = 4;     // fractional bits of Q3.4
  localparam int unsigned ALPHA_SHIFT_DEF = 4; // alpha*x = x - (x >>> 4)
  localparam int unsigned BETA_SHIFT_DEF  = 1; // x/beta ~= x >>> 1
  localparam int          UTH_DEF     = 12;    // 0.75 in Q3.4
  localparam int          HALF_BETA_DEF = 20;  // beta/2 = 1.25 in Q3.4
  localparam int unsigned SPAD_DEPTH_DEF = 128 * 9; // 128x9 entries per spad
  localparam int unsigned ACC_W_DEF   = 28;    // PE accumulator width

  // Convolution stage a PE is working in.
  typedef enum logic [1:0] {
    STAGE_FWD = 2'd0,   // forward: spikes (AND) weights, then LIF
    STAGE_BWD = 2'd1,   // backpropagation: dU (x) transposed weights
    STAGE_WUP = 2'd2,   // weight update: spikes (AND) dU into psum spad
    STAGE_OUT = 2'd3    // forward of an output layer: integrate only,
                        // no leak and no spikes
  } stage_e;

  // Commands accepted by the accelerator top.
  typedef enum logic [2:0] {
    OP_LOAD_W = 3'd0,   // W buffer bytes  -> filter spads
    OP_FWD    = 3'd1,   // forward pass of one output position
    OP_BWD    = 3'd2,   // backward convolution of one output position
    OP_WUP    = 3'd3,   // weight-gradient accumulation of one position
    OP_WREAD  = 3'd4,   // psum spads (dW) -> W buffer, psum cleared
    OP_PGU    = 3'd5,   // potential-gradient pass over NUM_PGU neurons
    OP_FWD_OUT = 3'd6   // OP_FWD for the output layer (STAGE_OUT)
  } op_e;

  // One command. Addresses: a/c are byte or word addresses depending on the
  // op (see sata_top); n_entries = C*R*R entries per receptive field;
  // n_units = number of PEs / PGUs taking part.
  typedef struct packed {
    op_e         op;
    logic [10:0] n_entries;
    logic [7:0]  n_units;
    logic [19:0] a_base;
    logic [19:0] b_base;
    logic [19:0] c_base;
    logic [19:0] d_base;
  } sata_cmd_t;

  // Activity counters kept by the top (number of events since reset).
  typedef struct packed {
    logic [31:0] mac;        // accumulations performed in PEs
    logic [31:0] mac_gated;  // accumulations + filter reads elided by sparsity
    logic [31:0] spikes;     // spikes fired by LIF units
    logic [31:0] ds;         // dS computations done in PGUs
    logic [31:0] ds_skip;    // dS computations elided by nabla-f sparsity
  } sata_stats_t;

  // Saturate a signed value to the 8-bit signed range.
  function automatic logic signed [7:0] sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

endpackage
