// lstm_pkg: sizes, number formats and command types shared by the
// zero-state-skipping LSTM accelerator.
//
// Array sizes follow the published design: four tiles (one per LSTM gate),
// 48 processing elements per tile, a 16-entry by 12-bit scratch memory per PE
// (one entry per batch), 8-bit weights and activations, and an off-chip port
// that delivers 24 weights plus one input element per clock.
//
// Fixed-point formats are this design's own choice (the source only says
// "8-bit quantization" and "12-bit" partial sums):
//   * 8-bit data (weights, x, h, c, gate values): signed Q2.5, range [-4, 4)
//   * 12-bit accumulator: signed Q6.5, range [-64, 64)
//   * a product of two Q2.5 numbers is shifted right by 5 (arithmetic) to Q6.5
//     and every addition saturates to 12 bits.
package lstm_pkg;

  localparam int unsigned N_TILES   = 4;    // one tile per gate: f, i, o, g
  localparam int unsigned N_PE      = 48;   // PEs per tile
  localparam int unsigned N_BATCH   = 16;   // scratch entries per PE = max batch
  localparam int unsigned DATA_W    = 8;    // weights, inputs, states
  localparam int unsigned ACC_W     = 12;   // partial sums
  localparam int unsigned FRAC      = 5;    // fractional bits of both formats
  localparam int unsigned BW_W      = 24;   // weights delivered per clock
  localparam int unsigned N_GROUPS  = (N_TILES * N_PE) / BW_W;  // 8 PE groups
  localparam int unsigned GRP_PER_TILE = N_PE / BW_W;           // 2
  localparam int unsigned BATCH_W   = $clog2(N_BATCH);          // 4
  localparam int unsigned ADDR_W    = 24;   // off-chip word address width
  localparam int unsigned CNT_W     = 16;   // vector lengths and counters

  // 1.0 in Q2.5
  localparam logic signed [DATA_W-1:0] ONE = 8'sd32;

  // Gate order in the tiles (tile #1..#4 of the paper are 0..3 here)
  localparam int unsigned T_F = 0;
  localparam int unsigned T_I = 1;
  localparam int unsigned T_O = 2;
  localparam int unsigned T_G = 3;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Multiplier operand A of a PE
  typedef enum logic [1:0] {
    A_INPUT  = 2'd0,   // broadcast input element of the PE's group
    A_OWNACT = 2'd1,   // this tile's own activation output, same lane
    A_REMOTE = 2'd2,   // vector delivered by the global router
    A_ZERO   = 2'd3
  } a_sel_e;

  // Multiplier operand B of a PE
  typedef enum logic [1:0] {
    B_WEIGHT = 2'd0,   // weight register of the PE's group
    B_REMOTE = 2'd1,   // vector delivered by the global router
    B_ONE    = 2'd2,   // constant 1.0
    B_ZERO   = 2'd3
  } b_sel_e;

  // Second adder operand of a PE
  typedef enum logic [1:0] {
    ADD_ZERO    = 2'd0,  // start a new sum
    ADD_SCRATCH = 2'd1,  // accumulate onto scratch[addr]
    ADD_EXT     = 2'd2   // add a 12-bit value delivered by the global router
  } add_sel_e;

  // Source of a remote vector in the global router
  typedef enum logic [2:0] {
    SRC_NONE = 3'd0,
    SRC_CREG = 3'd1,   // c(t-1) held in the input registers
    SRC_ACT  = 3'd2,   // activation outputs of tile src_tile
    SRC_OUT  = 3'd3    // PE outputs of tile src_tile (saturated to 8 bits for A/B)
  } src_e;

  // Command for one PE group (half a tile) for one clock
  typedef struct packed {
    logic                  valid;
    logic                  wr;
    logic [BATCH_W-1:0]    addr;
    add_sel_e              add_sel;
  } grp_cmd_t;

  // Command for one tile for one clock, issued by the controller
  typedef struct packed {
    a_sel_e     a_sel;
    b_sel_e     b_sel;
    src_e       ra_src;     // remote A vector source
    logic [1:0] ra_tile;
    src_e       rb_src;     // remote B vector source
    logic [1:0] rb_tile;
    logic [1:0] ext_tile;   // tile whose PE outputs feed ADD_EXT
    logic       act_en;     // latch activation outputs this clock
  } tile_cmd_t;

  // Per-time-step configuration written by the host before `start`.
  // Off-chip layout (addresses are word addresses of the three channels):
  //   wide channel (24 x 8 bit words):
  //     weights: w_base + (blk*ROWS + row)*N_GROUPS + grp, ROWS = 1 + dx + dh,
  //              row 0 = bias, rows 1..dx = W_x, rows 1+dx.. = W_h; word grp
  //              holds the 24 weights of PE group grp (tile grp/2, half grp%2)
  //     c state: c_base + (blk*N_BATCH + b)*2 + half
  //   value channel (8 bit): entry n of an encoded vector, batch b at
  //              base + n*N_BATCH + b
  //   index channel (16 bit): offset of entry n at base + n
  typedef struct packed {
    logic [CNT_W-1:0]   dx;          // input width
    logic [CNT_W-1:0]   dh;          // hidden width
    logic [BATCH_W:0]   batch;       // 1..16
    logic               sparse_en;   // 1: prune and skip, 0: dense
    logic [DATA_W-1:0]  thr;         // pruning threshold T (magnitude, Q2.5)
    logic [CNT_W-1:0]   nx;          // kept entries of the encoded x_t
    logic [CNT_W-1:0]   nh;          // kept entries of the encoded h_(t-1)
    logic [ADDR_W-1:0]  w_base;
    logic [ADDR_W-1:0]  c_base;
    logic [ADDR_W-1:0]  x_idx_base;
    logic [ADDR_W-1:0]  x_val_base;
    logic [ADDR_W-1:0]  h_idx_rd;
    logic [ADDR_W-1:0]  h_val_rd;
    logic [ADDR_W-1:0]  h_idx_wr;
    logic [ADDR_W-1:0]  h_val_wr;
  } cfg_t;

  // Saturate a 12-bit (or wider) value to the 8-bit data format
  function automatic data_t sat8(input acc_t v);
    if (v > acc_t'(127))       return 8'sd127;
    else if (v < acc_t'(-128)) return -8'sd128;
    else                       return data_t'(v);
  endfunction

  // Saturating 13-bit -> 12-bit
  function automatic acc_t sat12(input logic signed [ACC_W:0] v);
    if (v > 13'sd2047)       return 12'sd2047;
    else if (v < -13'sd2048) return -12'sd2048;
    else                     return acc_t'(v);
  endfunction

  // Pruning rule of the training method: values with |h| < T become zero
  function automatic data_t prune(input data_t h, input logic [DATA_W-1:0] thr);
    logic [DATA_W:0] mag;
    mag = (h < 0) ? (DATA_W+1)'(-int'(h)) : (DATA_W+1)'(h);
    return (mag < {1'b0, thr}) ? '0 : h;
  endfunction

endpackage
