// lstm_run: runs the accelerator over several LSTM time steps and checks
// every value it writes against a bit-exact software model.
//
// One instance holds one accelerator, one memory model and one workload
// (sizes DX, DH, batch B, number of steps, sparse or dense mode, pruning
// threshold THR, one-hot or real-valued x). Weights, x and c_0 are random
// ($urandom after SEED). The model computes the gates in the same order and
// the same fixed-point arithmetic (Q2.5 data, Q6.5 saturating sums, the
// piecewise-linear sigmoid/tanh), written out independently of the RTL.
// After each step it compares the kept-column count, every offset, every
// stored h value, every c value, the number of columns processed and the
// clock count of the step against
//   sum over blocks of  E*max(B,8) + 12 + 11*B + sum_units(kept ? B : 1) + 4
// with E = 1 + nx + nh kept input columns.
// Results go out on ports; the enclosing testbench prints the summary.
module lstm_run
  import lstm_pkg::*;
#(
  parameter int unsigned DX     = 8,
  parameter int unsigned DH     = 60,
  parameter int unsigned B      = 3,
  parameter int unsigned STEPS  = 3,
  parameter bit          SPARSE = 1'b1,
  parameter int unsigned THR    = 8,
  parameter bit          ONEHOT = 1'b1,
  parameter int unsigned SEED   = 1,
  parameter bit          VERBOSE = 1'b0
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   skipped_cols,   // hidden columns dropped by the encoder
  output int   bw_bound_steps, // steps with B < 8 (weight bandwidth limits)
  output int   full_steps,     // steps with B >= 8 (all PEs busy)
  output int   dense_steps,
  output int   partial_blocks, // blocks with fewer than 48 valid units
  output int   sat_events,     // sums that hit the 12-bit limit
  output int   cycles          // clocks of the accelerator, all steps
);

  localparam int unsigned NBLK  = (DH + N_PE - 1) / N_PE;
  localparam int unsigned ROWS  = 1 + DX + DH;
  localparam int unsigned WW    = NBLK * ROWS * N_GROUPS;
  localparam int unsigned CW    = NBLK * N_BATCH * 2;
  localparam int unsigned XV    = 0;
  localparam int unsigned HVA   = DX * N_BATCH;
  localparam int unsigned HVB   = HVA + DH * N_BATCH;
  localparam int unsigned XI    = 0;
  localparam int unsigned HIA   = DX;
  localparam int unsigned HIB   = DX + DH;

  logic              rst_n;
  logic              start;
  cfg_t              cfg;
  logic              busy, done;
  logic [CNT_W-1:0]  h_count, h_skipped;
  logic [31:0]       stat_cycles, stat_columns;
  logic              wmem_rd_en, wmem_wr_en, vmem_rd_en, vmem_wr_en, imem_rd_en, imem_wr_en;
  logic [ADDR_W-1:0] wmem_rd_addr, wmem_wr_addr, vmem_rd_addr, vmem_wr_addr;
  logic [ADDR_W-1:0] imem_rd_addr, imem_wr_addr;
  data_t             wmem_rd_data [BW_W];
  data_t             wmem_wr_data [BW_W];
  data_t             vmem_rd_data, vmem_wr_data;
  logic [CNT_W-1:0]  imem_rd_data, imem_wr_data;

  lstm_accel dut (.*);

  dram_model #(.WWORDS(WW + CW), .VWORDS(HVB + DH * N_BATCH), .IWORDS(DX + 2 * DH)) mem (
    .clk,
    // requests are ignored while the accelerator is held in reset
    .wmem_rd_en (wmem_rd_en && rst_n), .wmem_rd_addr, .wmem_rd_data,
    .wmem_wr_en (wmem_wr_en && rst_n), .wmem_wr_addr, .wmem_wr_data,
    .vmem_rd_en (vmem_rd_en && rst_n), .vmem_rd_addr, .vmem_rd_data,
    .vmem_wr_en (vmem_wr_en && rst_n), .vmem_wr_addr, .vmem_wr_data,
    .imem_rd_en (imem_rd_en && rst_n), .imem_rd_addr, .imem_rd_data,
    .imem_wr_en (imem_wr_en && rst_n), .imem_wr_addr, .imem_wr_data
  );

  // ------------------------------------------------------ reference model
  int w    [NBLK*N_PE][N_TILES][ROWS];   // weight of unit, gate, row
  int x    [B][DX];
  int hp   [B][DH];                      // pruned h_(t-1)
  int cp   [B][DH];
  int hn   [B][DH];
  int cn   [B][DH];

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction
  function automatic int s8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction
  function automatic int s12(input int v);
    return (v > 2047) ? 2047 : (v < -2048) ? -2048 : v;
  endfunction
  function automatic int mulq(input int a, input int b);
    return (a * b) >>> 5;
  endfunction
  function automatic int sigp(input int m);   // m >= 0, Q.5
    if (m >= 160) return 32;
    if (m >= 76)  return (m >> 5) + 27;
    if (m >= 32)  return (m >> 3) + 20;
    return (m >> 2) + 16;
  endfunction
  function automatic int sigm(input int v);
    return (v < 0) ? 32 - sigp(-v) : sigp(v);
  endfunction
  function automatic int tanhm(input int v);
    int t;
    t = 2 * sigp((v < 0 ? -v : v) * 2) - 32;
    return (v < 0) ? -t : t;
  endfunction
  function automatic int prn(input int v, input int thr);
    return ((v < 0 ? -v : v) < thr) ? 0 : v;
  endfunction

  task automatic model_step(input int thr);
    for (int b = 0; b < B; b++)
      for (int j = 0; j < DH; j++) begin
        int acc [N_TILES];
        int gv [N_TILES];
        int fc, ig, ct, tc;
        for (int t = 0; t < N_TILES; t++) begin
          acc[t] = s12(mulq(w[j][t][0], 32));
          for (int k = 0; k < DX; k++) acc[t] = s12(acc[t] + mulq(x[b][k], w[j][t][1+k]));
          for (int k = 0; k < DH; k++) acc[t] = s12(acc[t] + mulq(hp[b][k], w[j][t][1+DX+k]));
          if (acc[t] == 2047 || acc[t] == -2048) sat_events++;
          gv[t] = (t == T_G) ? tanhm(acc[t]) : sigm(acc[t]);
        end
        fc = s12(mulq(gv[T_F], cp[b][j]));
        ig = s12(mulq(gv[T_I], gv[T_G]));
        ct = s12(mulq(s8(ig), 32) + fc);
        tc = tanhm(ct);
        cn[b][j] = s8(ct);
        hn[b][j] = prn(s8(s12(mulq(gv[T_O], tc))), thr);
      end
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [DH=%0d B=%0d] %s", DH, B, what);
    end
  endtask

  // ------------------------------------------------------------- stimulus
  initial begin
    int nx, nh, hrd, hwr, hird, hiwr, thr, exp_cyc;
    finished = 0; checks = 0; failures = 0; skipped_cols = 0; bw_bound_steps = 0;
    full_steps = 0; dense_steps = 0; partial_blocks = 0; sat_events = 0; cycles = 0;
    void'($urandom(SEED));
    rst_n = 0; start = 0; cfg = '0;
    thr = SPARSE ? int'(THR) : 0;
    // weights (units beyond DH are zero) and c_0
    for (int u = 0; u < NBLK * N_PE; u++)
      for (int t = 0; t < N_TILES; t++)
        for (int r = 0; r < ROWS; r++)
          w[u][t][r] = (u < DH) ? rnd(-14, 14) : 0;
    for (int bk = 0; bk < NBLK; bk++)
      for (int r = 0; r < ROWS; r++)
        for (int g = 0; g < N_GROUPS; g++)
          for (int e = 0; e < BW_W; e++)
            mem.wmem[(bk * ROWS + r) * N_GROUPS + g][e] =
              data_t'(w[bk * N_PE + (g % GRP_PER_TILE) * BW_W + e][g / GRP_PER_TILE][r]);
    for (int i = 0; i < CW; i++)
      for (int e = 0; e < BW_W; e++) mem.wmem[WW + i][e] = '0;
    for (int b = 0; b < B; b++)
      for (int j = 0; j < DH; j++) begin
        cp[b][j] = rnd(-40, 40);
        hp[b][j] = 0;
        mem.wmem[WW + ((j / N_PE) * N_BATCH + b) * 2 + (j % N_PE) / BW_W][j % BW_W] =
          data_t'(cp[b][j]);
      end
    nh = 0;
    hrd = HVA; hwr = HVB; hird = HIA; hiwr = HIB;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    for (int s = 0; s < STEPS; s++) begin
      int n, last, kept, enc_cost;
      // x_t: one-hot characters or real-valued embeddings, encoded like h
      for (int b = 0; b < B; b++) begin
        int ch;
        ch = rnd(0, DX - 1);
        for (int k = 0; k < DX; k++)
          x[b][k] = ONEHOT ? ((k == ch) ? 32 : 0) : ((rnd(0, 3) == 0) ? 0 : rnd(-32, 32));
      end
      n = 0; last = -1;
      for (int k = 0; k < DX; k++) begin
        bit nzc;
        nzc = 0;
        for (int b = 0; b < B; b++) if (x[b][k] != 0) nzc = 1;
        if (nzc) begin
          mem.imem[XI + n] = CNT_W'(k - last - 1);
          for (int b = 0; b < B; b++) mem.vmem[XV + n * N_BATCH + b] = data_t'(x[b][k]);
          last = k; n++;
        end
      end
      nx = n;

      model_step(thr);

      cfg = '0;
      cfg.dx = CNT_W'(DX); cfg.dh = CNT_W'(DH); cfg.batch = (BATCH_W+1)'(B);
      cfg.sparse_en = SPARSE; cfg.thr = DATA_W'(THR);
      cfg.nx = CNT_W'(nx); cfg.nh = CNT_W'(nh);
      cfg.w_base = '0; cfg.c_base = ADDR_W'(WW);
      cfg.x_idx_base = ADDR_W'(XI); cfg.x_val_base = ADDR_W'(XV);
      cfg.h_idx_rd = ADDR_W'(hird); cfg.h_val_rd = ADDR_W'(hrd);
      cfg.h_idx_wr = ADDR_W'(hiwr); cfg.h_val_wr = ADDR_W'(hwr);
      @(posedge clk); start <= 1;
      @(posedge clk); start <= 0;
      while (!done) @(posedge clk);
      @(posedge clk);

      // kept columns of h_t
      kept = 0; last = -1; enc_cost = 0;
      for (int j = 0; j < DH; j++) begin
        bit nzc;
        nzc = !SPARSE;
        for (int b = 0; b < B; b++) if (hn[b][j] != 0) nzc = 1;
        enc_cost += nzc ? B : 1;
        if (nzc) begin
          if (kept < int'(h_count)) begin
            check(mem.imem[hiwr + kept] == CNT_W'(j - last - 1),
                  $sformatf("step %0d offset of kept column %0d (unit %0d)", s, kept, j));
            for (int b = 0; b < B; b++)
              check(mem.vmem[hwr + kept * N_BATCH + b] == data_t'(hn[b][j]),
                    $sformatf("step %0d h[b=%0d][%0d] = %0d, want %0d", s, b, j,
                              mem.vmem[hwr + kept * N_BATCH + b], hn[b][j]));
          end
          last = j; kept++;
        end
      end
      check(int'(h_count) == kept, $sformatf("step %0d kept %0d, want %0d", s, h_count, kept));
      check(int'(h_skipped) == DH - kept, $sformatf("step %0d skipped count", s));
      skipped_cols += DH - kept;
      for (int b = 0; b < B; b++)
        for (int j = 0; j < DH; j++)
          check(mem.wmem[WW + ((j / N_PE) * N_BATCH + b) * 2 + (j % N_PE) / BW_W][j % BW_W]
                == data_t'(cn[b][j]), $sformatf("step %0d c[b=%0d][%0d]", s, b, j));
      check(stat_columns == 32'(NBLK * (1 + nx + nh)), $sformatf("step %0d columns", s));
      exp_cyc = NBLK * ((1 + nx + nh) * ((B > N_GROUPS) ? B : N_GROUPS) + 12 + 11 * B + 4)
                + enc_cost;
      check(int'(stat_cycles) == exp_cyc,
            $sformatf("step %0d cycles %0d, want %0d", s, stat_cycles, exp_cyc));
      check(mem.rd_errors == 0, "memory accesses in range");
      if (VERBOSE)
        $display("step %0d: DH=%0d B=%0d nx=%0d nh=%0d -> kept %0d, %0d clocks",
                 s, DH, B, nx, nh, kept, stat_cycles);
      cycles += int'(stat_cycles);
      if (B < N_GROUPS) bw_bound_steps++; else full_steps++;
      if (!SPARSE) dense_steps++;
      if (DH % N_PE != 0) partial_blocks++;

      // next step: h_t becomes h_(t-1), c_t becomes c_(t-1), swap h areas
      hp = hn; cp = cn; nh = kept;
      begin
        int t0;
        t0 = hrd; hrd = hwr; hwr = t0;
        t0 = hird; hird = hiwr; hiwr = t0;
      end
    end
    finished = 1;
  end

endmodule
