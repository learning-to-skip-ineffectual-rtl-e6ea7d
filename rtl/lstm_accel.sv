// lstm_accel: zero-state-skipping LSTM accelerator (top level).
//
// Computes one LSTM time step for a batch of up to 16 sequences:
//   [f i o g] = [sig sig sig tanh](W_h h_(t-1) + W_x x_t + b)
//   c_t = f*c_(t-1) + i*g,   h_t = o*tanh(c_t)
// where h_(t-1) has been pruned (|h| < T set to 0). Hidden-state columns that
// are zero in every batch are never stored and never fetched: the encoder
// replaces them by offsets, and the weight rows that would have multiplied
// them are skipped, so the run time of the matrix-vector product scales with
// the number of kept columns.
//
// Structure (as in the source): weight/input registers, a global router,
// four tiles of 48 PEs (tile 0..3 = gates f, i, o, g; each PE with a 16 x
// 12-bit scratch memory and a sigmoid/tanh unit behind it), an encoder and a
// controller. The off-chip LPDDR4 memory is outside: it is reached through
// three channels with one-clock read latency,
//   wide  : 24 x 8-bit words (weights, c state) - the 24 weights per clock
//           the source's 51.2 Gb/s at 200 MHz provides,
//   value : 8-bit elements (x_t and h values), one per clock,
//   index : 16-bit offsets of the encoded x_t and h vectors.
// The split into three channels and their protocol are this design's.
//
// Use: write cfg, pulse start, wait for done; h_count is then the number of
// kept columns of h_t (cfg.nh of the next step). The host swaps the h read
// and write areas between steps.
module lstm_accel
  import lstm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  cfg_t               cfg,
  output logic               busy,
  output logic               done,
  output logic [CNT_W-1:0]   h_count,
  output logic [CNT_W-1:0]   h_skipped,
  output logic [31:0]        stat_cycles,
  output logic [31:0]        stat_columns,
  // wide channel
  output logic               wmem_rd_en,
  output logic [ADDR_W-1:0]  wmem_rd_addr,
  input  data_t              wmem_rd_data [BW_W],
  output logic               wmem_wr_en,
  output logic [ADDR_W-1:0]  wmem_wr_addr,
  output data_t              wmem_wr_data [BW_W],
  // value channel
  output logic               vmem_rd_en,
  output logic [ADDR_W-1:0]  vmem_rd_addr,
  input  data_t              vmem_rd_data,
  output logic               vmem_wr_en,
  output logic [ADDR_W-1:0]  vmem_wr_addr,
  output data_t              vmem_wr_data,
  // index channel
  output logic               imem_rd_en,
  output logic [ADDR_W-1:0]  imem_rd_addr,
  input  logic [CNT_W-1:0]   imem_rd_data,
  output logic               imem_wr_en,
  output logic [ADDR_W-1:0]  imem_wr_addr,
  output logic [CNT_W-1:0]   imem_wr_data
);

  // controller <-> datapath
  logic               w_load, c_load, c_half, in_valid, in_first, in_bias;
  logic [$clog2(N_GROUPS)-1:0] w_grp;
  logic [BATCH_W-1:0] in_batch;
  logic               mac_mode;
  tile_cmd_t          tcmd    [N_TILES];
  grp_cmd_t           had_cmd [N_TILES];
  logic [N_PE-1:0]    h_nz;
  logic [DATA_W-1:0]  thr_eff;
  logic               sparse_en;
  logic               wmem_wr_half;
  logic [$clog2(N_PE)-1:0] h_lane;
  logic               enc_clear, enc_col_valid, enc_col_nonzero, enc_emit;
  logic [CNT_W-1:0]   enc_offset, enc_index;

  // weight/input registers
  data_t              weight   [N_GROUPS][BW_W];
  logic               st_valid [N_GROUPS];
  logic               st_first [N_GROUPS];
  logic [BATCH_W-1:0] st_batch [N_GROUPS];
  data_t              st_data  [N_GROUPS];
  data_t              creg     [N_PE];
  data_t              in_data;

  // tiles
  data_t              act    [N_TILES][N_PE];
  acc_t               pe_out [N_TILES][N_PE];
  grp_cmd_t           t_grp_cmd  [N_TILES][GRP_PER_TILE];
  data_t              t_grp_in   [N_TILES][GRP_PER_TILE];
  data_t              t_weight   [N_TILES][N_PE];
  data_t              t_remote_a [N_TILES][N_PE];
  data_t              t_remote_b [N_TILES][N_PE];
  acc_t               t_ext      [N_TILES][N_PE];

  controller u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .wmem_rd_en, .wmem_rd_addr, .wmem_wr_en, .wmem_wr_addr, .wmem_wr_half,
    .vmem_rd_en, .vmem_rd_addr, .vmem_wr_en, .vmem_wr_addr, .h_lane,
    .imem_rd_en, .imem_rd_addr, .imem_rd_data, .imem_wr_en, .imem_wr_addr,
    .w_load, .w_grp, .c_load, .c_half, .in_valid, .in_first, .in_bias, .in_batch,
    .mac_mode, .tcmd, .had_cmd, .h_nz, .thr_eff, .sparse_en,
    .enc_clear, .enc_col_valid, .enc_col_nonzero, .enc_emit, .enc_index,
    .stat_cycles, .stat_columns
  );

  // the bias row multiplies a constant 1.0 that is not fetched
  assign in_data = in_bias ? ONE : vmem_rd_data;

  wi_regs u_wi (
    .clk, .rst_n,
    .wide_data (wmem_rd_data),
    .w_load, .w_grp, .c_load, .c_half,
    .in_valid, .in_first, .in_batch, .in_data,
    .weight, .st_valid, .st_first, .st_batch, .st_data, .creg
  );

  global_router u_gr (
    .mac_mode, .tcmd, .had_cmd,
    .weight, .st_valid, .st_first, .st_batch, .st_data, .creg,
    .act, .pe_out,
    .t_grp_cmd, .t_grp_in, .t_weight, .t_remote_a, .t_remote_b, .t_ext
  );

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    tile #(.IS_TANH(t == T_G)) u_tile (
      .clk, .rst_n,
      .cmd      (tcmd[t]),
      .grp_cmd  (t_grp_cmd[t]),
      .grp_in   (t_grp_in[t]),
      .weight   (t_weight[t]),
      .remote_a (t_remote_a[t]),
      .remote_b (t_remote_b[t]),
      .ext      (t_ext[t]),
      .pe_out   (pe_out[t]),
      .act_out  (act[t])
    );
  end

  // pruning of h_t, lane by lane, and the value written off-chip
  always_comb begin
    for (int l = 0; l < N_PE; l++)
      h_nz[l] = (prune(sat8(pe_out[T_O][l]), thr_eff) != '0);
    vmem_wr_data = prune(sat8(pe_out[T_O][h_lane]), thr_eff);
    for (int l = 0; l < BW_W; l++)
      wmem_wr_data[l] = sat8(pe_out[T_G][(wmem_wr_half ? BW_W : 0) + l]);
  end

  encoder u_enc (
    .clk, .rst_n,
    .clear       (enc_clear),
    .sparse_en   (sparse_en),
    .col_valid   (enc_col_valid),
    .col_nonzero (enc_col_nonzero),
    .emit        (enc_emit),
    .offset      (enc_offset),
    .index       (enc_index),
    .kept        (h_count),
    .skipped     (h_skipped)
  );

  assign imem_wr_data = enc_offset;

endmodule
