// controller: sequences one LSTM time step on the accelerator.
//
// The hidden units are processed in blocks of 48 (one per PE lane; tile t of
// the block computes gate t). For every block the controller runs three
// phases:
//
//  MAC  - For each kept input column (the bias row first, then the kept
//         columns of x_t, then the kept columns of h_(t-1)) it spends one
//         period of P = max(B, 8) clocks: in clock g (g < 8) it reads the 24
//         weights of PE group g for this row, and in clock b (b < B) the input
//         element of batch b. The input pipeline in wi_regs carries each
//         element past the 8 groups, so the batches share one weight fetch.
//         Columns of h_(t-1) that were all-zero in every batch were never
//         stored; the stored offsets (zero-run lengths written by the encoder
//         in the previous step) give the row address of each kept column, so
//         pruned columns cost no clock at all.
//  HAD  - For each batch b: all PEs hand their sum to the sigmoid/tanh units;
//         tile f multiplies by c(t-1) read from off-chip, tile i forms i*g,
//         tile g adds the two to get c_t (written back off-chip) and takes
//         tanh(c_t), and tile o forms h_t = o*tanh(c_t), which it keeps in
//         scratch entry b. Each hidden unit's "non-zero in some batch" flag
//         is collected after pruning (|h| < T becomes 0).
//  ENC  - Unit by unit, the encoder either counts an all-zero unit or emits
//         its offset; the h_t values of a kept unit (one per batch) are read
//         back from tile o and written off-chip.
//
// The tile assignment of the element-wise products and the skipping rule
// follow the source. The phase order, the off-chip layout (see lstm_pkg),
// the prefetch of offsets, and all clock-level timing are this design's.
//
// Timing: start is sampled in IDLE; done pulses for one clock at the end of
// the step. Memory reads return data in the clock after the request.
module controller
  import lstm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  cfg_t               cfg,
  output logic               busy,
  output logic               done,
  // wide channel (weights and c state)
  output logic               wmem_rd_en,
  output logic [ADDR_W-1:0]  wmem_rd_addr,
  output logic               wmem_wr_en,
  output logic [ADDR_W-1:0]  wmem_wr_addr,
  output logic               wmem_wr_half,
  // value channel
  output logic               vmem_rd_en,
  output logic [ADDR_W-1:0]  vmem_rd_addr,
  output logic               vmem_wr_en,
  output logic [ADDR_W-1:0]  vmem_wr_addr,
  output logic [$clog2(N_PE)-1:0] h_lane,  // lane whose h value is written
  // index channel
  output logic               imem_rd_en,
  output logic [ADDR_W-1:0]  imem_rd_addr,
  input  logic [CNT_W-1:0]   imem_rd_data,
  output logic               imem_wr_en,
  output logic [ADDR_W-1:0]  imem_wr_addr,
  // weight/input registers
  output logic               w_load,
  output logic [$clog2(N_GROUPS)-1:0] w_grp,
  output logic               c_load,
  output logic               c_half,
  output logic               in_valid,
  output logic               in_first,
  output logic               in_bias,
  output logic [BATCH_W-1:0] in_batch,
  // tiles and routers
  output logic               mac_mode,
  output tile_cmd_t          tcmd    [N_TILES],
  output grp_cmd_t           had_cmd [N_TILES],
  input  logic [N_PE-1:0]    h_nz,          // pruned h_t of lane != 0
  output logic [DATA_W-1:0]  thr_eff,       // pruning threshold in force (0 when dense)
  output logic               sparse_en,     // mode of the step in progress
  // encoder
  output logic               enc_clear,
  output logic               enc_col_valid,
  output logic               enc_col_nonzero,
  input  logic               enc_emit,
  input  logic [CNT_W-1:0]   enc_index,
  // statistics
  output logic [31:0]        stat_cycles,    // clocks of the last step
  output logic [31:0]        stat_columns    // input columns processed (all blocks)
);

  typedef enum logic [2:0] {S_IDLE, S_MAC, S_DRAIN, S_HAD, S_ENC, S_ENC_DRAIN, S_NEXT}
    state_e;
  typedef enum logic [1:0] {K_BIAS, K_X, K_H} kind_e;

  localparam int unsigned DRAIN_CLK = N_GROUPS + 4;
  localparam int unsigned HAD_CLK   = 11;

  state_e             state;
  cfg_t               c;
  logic [BATCH_W:0]   period;        // P = max(B, N_GROUPS)
  logic [CNT_W-1:0]   rows;          // 1 + dx + dh
  logic [ADDR_W-1:0]  wblk;          // first weight word of the block
  logic [ADDR_W-1:0]  cblk;          // first c word of the block
  logic [CNT_W:0]     lanes_left;    // hidden units not yet done, this block on
  logic [$clog2(N_PE):0] lanes;      // valid lanes of this block

  // column sequencer
  kind_e              cur_kind, nxt_kind;
  logic [CNT_W-1:0]   cur_n, nxt_n;
  logic [CNT_W-1:0]   cur_row, nxt_row;
  logic               nxt_exists;
  logic [CNT_W-1:0]   x_next, h_next;    // first column that may follow
  logic [BATCH_W:0]   ph;                // clock within the period
  logic               idx_pending;       // offset read in flight

  logic [4:0]         cnt;               // drain / HAD step counter
  logic [BATCH_W-1:0] bat;               // batch in HAD / ENC
  logic [N_PE-1:0]    nz_mask;
  logic [$clog2(N_PE):0] lane;
  logic [CNT_W-1:0]   enc_idx_q;

  // delayed strobes
  logic               wld_d, cld_d, inv_d, inb_d;
  logic [$clog2(N_GROUPS)-1:0] wgrp_d;
  logic [BATCH_W-1:0] inbat_d;
  logic               cld_half_d;
  logic [1:0]         vw_v;
  logic [ADDR_W-1:0]  vw_a [2];
  logic [$clog2(N_PE)-1:0] vw_l [2];

  assign busy    = (state != S_IDLE);
  assign thr_eff   = c.sparse_en ? c.thr : '0;
  assign sparse_en = c.sparse_en;

  // next column after the current one (kind and position in its stream)
  always_comb begin
    nxt_kind   = K_X;
    nxt_n      = '0;
    nxt_exists = 1'b1;
    unique case (cur_kind)
      K_BIAS: begin
        if (c.nx != 0)      begin nxt_kind = K_X; nxt_n = '0; end
        else if (c.nh != 0) begin nxt_kind = K_H; nxt_n = '0; end
        else                nxt_exists = 1'b0;
      end
      K_X: begin
        if (cur_n + 1'b1 < c.nx) begin nxt_kind = K_X; nxt_n = cur_n + 1'b1; end
        else if (c.nh != 0)      begin nxt_kind = K_H; nxt_n = '0; end
        else                     nxt_exists = 1'b0;
      end
      default: begin
        if (cur_n + 1'b1 < c.nh) begin nxt_kind = K_H; nxt_n = cur_n + 1'b1; end
        else                     nxt_exists = 1'b0;
      end
    endcase
  end

  // ---------------------------------------------------------------- commands
  always_comb begin
    wmem_rd_en   = 1'b0;
    wmem_rd_addr = '0;
    wmem_wr_en   = 1'b0;
    wmem_wr_addr = '0;
    wmem_wr_half = 1'b0;
    vmem_rd_en   = 1'b0;
    vmem_rd_addr = '0;
    imem_rd_en   = 1'b0;
    imem_rd_addr = '0;
    imem_wr_en   = 1'b0;
    imem_wr_addr = '0;
    mac_mode     = (state == S_MAC) || (state == S_DRAIN);
    enc_col_valid   = 1'b0;
    enc_col_nonzero = 1'b0;
    for (int t = 0; t < N_TILES; t++) begin
      tcmd[t]    = '{a_sel: A_INPUT, b_sel: B_WEIGHT, ra_src: SRC_NONE, ra_tile: 2'd0,
                     rb_src: SRC_NONE, rb_tile: 2'd0, ext_tile: 2'd0, act_en: 1'b0};
      had_cmd[t] = '{valid: 1'b0, wr: 1'b0, addr: bat, add_sel: ADD_ZERO};
    end

    unique case (state)
      S_MAC: begin
        if (ph < N_GROUPS) begin
          wmem_rd_en   = 1'b1;
          wmem_rd_addr = wblk + ADDR_W'(cur_row) * N_GROUPS + ADDR_W'(ph);
        end
        if (ph < c.batch && cur_kind != K_BIAS) begin
          vmem_rd_en   = 1'b1;
          vmem_rd_addr = ((cur_kind == K_X) ? c.x_val_base : c.h_val_rd)
                         + ADDR_W'(cur_n) * N_BATCH + ADDR_W'(ph);
        end
        if (ph == 0 && nxt_exists) begin
          imem_rd_en   = 1'b1;
          imem_rd_addr = ((nxt_kind == K_X) ? c.x_idx_base : c.h_idx_rd) + ADDR_W'(nxt_n);
        end
      end

      S_HAD: begin
        // step 0: sums to the activation units; fetch c(t-1) of this batch
        if (cnt == 0) begin
          for (int t = 0; t < N_TILES; t++) begin
            tcmd[t].a_sel = A_ZERO;
            tcmd[t].b_sel = B_ZERO;
            had_cmd[t]    = '{valid: 1'b1, wr: 1'b0, addr: bat, add_sel: ADD_SCRATCH};
          end
        end
        if (cnt == 0 || cnt == 1) begin
          wmem_rd_en   = 1'b1;
          wmem_rd_addr = cblk + ADDR_W'(bat) * 2 + ADDR_W'(cnt[0]);
        end
        if (cnt == 2)
          for (int t = 0; t < N_TILES; t++) tcmd[t].act_en = 1'b1;
        // step 3: f * c(t-1) in tile f, i * g in tile i
        if (cnt == 3) begin
          tcmd[T_F].a_sel  = A_OWNACT;
          tcmd[T_F].b_sel  = B_REMOTE;
          tcmd[T_F].rb_src = SRC_CREG;
          had_cmd[T_F]     = '{valid: 1'b1, wr: 1'b0, addr: bat, add_sel: ADD_ZERO};
          tcmd[T_I].a_sel  = A_OWNACT;
          tcmd[T_I].b_sel  = B_REMOTE;
          tcmd[T_I].rb_src = SRC_ACT;
          tcmd[T_I].rb_tile = 2'(T_G);
          had_cmd[T_I]     = '{valid: 1'b1, wr: 1'b0, addr: bat, add_sel: ADD_ZERO};
        end
        // step 5: c_t = i*g + f*c(t-1) in tile g
        if (cnt == 5) begin
          tcmd[T_G].a_sel    = A_REMOTE;
          tcmd[T_G].ra_src   = SRC_OUT;
          tcmd[T_G].ra_tile  = 2'(T_I);
          tcmd[T_G].b_sel    = B_ONE;
          tcmd[T_G].ext_tile = 2'(T_F);
          had_cmd[T_G]       = '{valid: 1'b1, wr: 1'b0, addr: bat, add_sel: ADD_EXT};
        end
        // step 7: tanh(c_t); write c_t back (two words)
        if (cnt == 7) tcmd[T_G].act_en = 1'b1;
        if (cnt == 7 || cnt == 8) begin
          wmem_wr_en   = 1'b1;
          wmem_wr_addr = cblk + ADDR_W'(bat) * 2 + ADDR_W'(cnt == 8);
          wmem_wr_half = (cnt == 8);
        end
        // step 8: h_t = o * tanh(c_t) in tile o, kept in scratch[b]
        if (cnt == 8) begin
          tcmd[T_O].a_sel   = A_OWNACT;
          tcmd[T_O].b_sel   = B_REMOTE;
          tcmd[T_O].rb_src  = SRC_ACT;
          tcmd[T_O].rb_tile = 2'(T_G);
          had_cmd[T_O]      = '{valid: 1'b1, wr: 1'b1, addr: bat, add_sel: ADD_ZERO};
        end
      end

      S_ENC: begin
        if (bat == 0) begin
          enc_col_valid   = 1'b1;
          enc_col_nonzero = nz_mask[lane[$clog2(N_PE)-1:0]];
          if (enc_emit) begin
            imem_wr_en   = 1'b1;
            imem_wr_addr = c.h_idx_wr + ADDR_W'(enc_index);
          end
        end
        if (bat != 0 || enc_emit) begin
          tcmd[T_O].a_sel = A_ZERO;
          tcmd[T_O].b_sel = B_ZERO;
          had_cmd[T_O]    = '{valid: 1'b1, wr: 1'b0, addr: bat, add_sel: ADD_SCRATCH};
        end
      end

      default: ;
    endcase

    vmem_wr_en   = vw_v[1];
    vmem_wr_addr = vw_a[1];
    h_lane       = vw_l[1];
    w_load       = wld_d;
    w_grp        = wgrp_d;
    c_load       = cld_d;
    c_half       = cld_half_d;
    in_valid     = inv_d;
    in_bias      = inb_d;
    in_first     = inb_d;
    in_batch     = inbat_d;
  end

  assign enc_clear = (state == S_IDLE) && start;

  // ------------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c <= '0;
      period <= '0; rows <= '0; wblk <= '0; cblk <= '0;
      lanes_left <= '0; lanes <= '0;
      cur_kind <= K_BIAS; cur_n <= '0; cur_row <= '0; nxt_row <= '0;
      x_next <= '0; h_next <= '0; ph <= '0; idx_pending <= 1'b0;
      cnt <= '0; bat <= '0; nz_mask <= '0; lane <= '0; enc_idx_q <= '0;
      done <= 1'b0;
      wld_d <= 1'b0; wgrp_d <= '0; cld_d <= 1'b0; cld_half_d <= 1'b0;
      inv_d <= 1'b0; inb_d <= 1'b0; inbat_d <= '0;
      vw_v <= '0; vw_a <= '{default: '0}; vw_l <= '{default: '0};
      stat_cycles <= '0; stat_columns <= '0;
    end else begin
      done <= 1'b0;
      // one-clock delayed strobes that go with the memory read data
      wld_d      <= (state == S_MAC) && (ph < N_GROUPS);
      wgrp_d     <= ph[$clog2(N_GROUPS)-1:0];
      cld_d      <= (state == S_HAD) && (cnt == 0 || cnt == 1);
      cld_half_d <= cnt[0];
      inv_d      <= (state == S_MAC) && (ph < c.batch);
      inb_d      <= (cur_kind == K_BIAS);
      inbat_d    <= ph[BATCH_W-1:0];
      // h value write-back: two clocks after the scratch read in ENC
      vw_v[0] <= (state == S_ENC) && (bat != 0 || enc_emit);
      vw_a[0] <= c.h_val_wr + ADDR_W'((bat == 0) ? enc_index : enc_idx_q) * N_BATCH
                 + ADDR_W'(bat);
      vw_l[0] <= lane[$clog2(N_PE)-1:0];
      vw_v[1] <= vw_v[0];
      vw_a[1] <= vw_a[0];
      vw_l[1] <= vw_l[0];
      if (busy) stat_cycles <= stat_cycles + 1;

      unique case (state)
        S_IDLE: if (start) begin
          c          <= cfg;
          period     <= (cfg.batch > N_GROUPS) ? cfg.batch : (BATCH_W+1)'(N_GROUPS);
          rows       <= 1'b1 + cfg.dx + cfg.dh;
          wblk       <= cfg.w_base;
          cblk       <= cfg.c_base;
          lanes_left <= {1'b0, cfg.dh};
          lanes      <= (cfg.dh >= N_PE) ? ($clog2(N_PE)+1)'(N_PE) : ($clog2(N_PE)+1)'(cfg.dh);
          cur_kind   <= K_BIAS; cur_n <= '0; cur_row <= '0;
          x_next     <= '0; h_next <= '0; ph <= '0;
          stat_cycles  <= '0;
          stat_columns <= '0;
          state      <= S_MAC;
        end

        S_MAC: begin
          idx_pending <= (ph == 0) && nxt_exists;
          if (idx_pending) begin
            // offset of the next kept column has arrived
            if (nxt_kind == K_X) begin
              nxt_row <= 1'b1 + x_next + imem_rd_data;
              x_next  <= x_next + imem_rd_data + 1'b1;
            end else begin
              nxt_row <= 1'b1 + c.dx + h_next + imem_rd_data;
              h_next  <= h_next + imem_rd_data + 1'b1;
            end
          end
          if (ph == period - 1) begin
            ph <= '0;
            stat_columns <= stat_columns + 1;
            if (nxt_exists) begin
              cur_kind <= nxt_kind;
              cur_n    <= nxt_n;
              cur_row  <= nxt_row;
            end else begin
              cnt   <= '0;
              state <= S_DRAIN;
            end
          end else begin
            ph <= ph + 1'b1;
          end
        end

        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == DRAIN_CLK - 1) begin
            cnt     <= '0;
            bat     <= '0;
            nz_mask <= '0;
            state   <= S_HAD;
          end
        end

        S_HAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == 10) nz_mask <= nz_mask | h_nz;
          if (cnt == HAD_CLK - 1) begin
            cnt <= '0;
            if (bat == c.batch - 1) begin
              bat   <= '0;
              lane  <= '0;
              state <= S_ENC;
            end else begin
              bat <= bat + 1'b1;
            end
          end
        end

        S_ENC: begin
          if (bat == 0) enc_idx_q <= enc_index;
          if ((bat == 0 && !enc_emit) || bat == c.batch - 1) begin
            bat <= '0;
            if (lane == lanes - 1) begin
              cnt   <= '0;
              state <= S_ENC_DRAIN;
            end else begin
              lane <= lane + 1'b1;
            end
          end else begin
            bat <= bat + 1'b1;
          end
        end

        S_ENC_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == 2) state <= S_NEXT;
        end

        S_NEXT: begin
          if (lanes_left <= N_PE) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            lanes_left <= lanes_left - N_PE;
            lanes      <= (lanes_left - N_PE >= N_PE) ? ($clog2(N_PE)+1)'(N_PE)
                                                       : ($clog2(N_PE)+1)'(lanes_left - N_PE);
            wblk       <= wblk + ADDR_W'(rows) * N_GROUPS;
            cblk       <= cblk + N_BATCH * 2;
            cur_kind   <= K_BIAS; cur_n <= '0; cur_row <= '0;
            x_next     <= '0; h_next <= '0; ph <= '0;
            state      <= S_MAC;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
