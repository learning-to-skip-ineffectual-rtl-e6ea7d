// tb_controller: runs the controller alone for two configurations (batch 3:
// one column per 8 clocks; batch 12: one column per 12 clocks), with 70
// hidden units (two blocks), two kept x columns and three kept h columns
// whose offsets sit in a small index memory model. It records every request
// and checks: the weight rows fetched (bias, then the kept x and h rows given
// by the offsets, i.e. the skipped rows are never fetched), one group word
// per clock at the right clock of each period, the input reads of every
// batch, the c(t-1) reads and c_t writes, the offsets and h values written
// for the kept units (the tb plays the encoder), and the total clock count.
module tb_controller;
  import lstm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done;
  cfg_t cfg;
  logic wmem_rd_en, wmem_wr_en, wmem_wr_half, vmem_rd_en, vmem_wr_en, imem_rd_en, imem_wr_en;
  logic [ADDR_W-1:0] wmem_rd_addr, wmem_wr_addr, vmem_rd_addr, vmem_wr_addr, imem_rd_addr, imem_wr_addr;
  logic [5:0] h_lane;
  logic [CNT_W-1:0] imem_rd_data;
  logic w_load, c_load, c_half, in_valid, in_first, in_bias;
  logic [2:0] w_grp;
  logic [3:0] in_batch;
  logic mac_mode;
  tile_cmd_t tcmd [4];
  grp_cmd_t had_cmd [4];
  logic [47:0] h_nz;
  logic [7:0] thr_eff;
  logic sparse_en;
  logic enc_clear, enc_col_valid, enc_col_nonzero, enc_emit;
  logic [CNT_W-1:0] enc_index;
  logic [31:0] stat_cycles, stat_columns;
  int checks = 0, failures = 0;
  int cyc;
  int kept_cnt;

  controller dut (.*);

  // index memory model and encoder stand-in
  logic [CNT_W-1:0] imem [0:255];
  always_ff @(posedge clk) if (imem_rd_en) imem_rd_data <= imem[imem_rd_addr];
  assign enc_emit  = enc_col_valid && (enc_col_nonzero || !sparse_en);
  assign enc_index = CNT_W'(kept_cnt);
  always_ff @(posedge clk) begin
    if (enc_clear) kept_cnt <= 0;
    else if (enc_emit) kept_cnt <= kept_cnt + 1;
  end

  // event log
  int wr_rd_t [$], wr_rd_a [$], v_rd_t [$], v_rd_a [$], w_wr_a [$], v_wr_a [$], i_wr_a [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && wmem_rd_en) begin wr_rd_t.push_back(cyc); wr_rd_a.push_back(int'(wmem_rd_addr)); end
    if (rst_n && vmem_rd_en) begin v_rd_t.push_back(cyc); v_rd_a.push_back(int'(vmem_rd_addr)); end
    if (rst_n && wmem_wr_en) w_wr_a.push_back(int'(wmem_wr_addr));
    if (rst_n && vmem_wr_en) v_wr_a.push_back(int'(vmem_wr_addr));
    if (rst_n && imem_wr_en) i_wr_a.push_back(int'(imem_wr_addr));
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  localparam int DX = 5, DH = 70, ROWS = 1 + DX + DH, CB = 100000;
  localparam int XROWS [2] = '{2, 5};          // x offsets 1, 2 -> columns 1, 4
  localparam int HROWS [3] = '{6, 12, 33};     // h offsets 0, 5, 20 -> columns 0, 6, 27

  task automatic run(input int B);
    int P, t0, n, nblk, e_cyc, kept_lane;
    int rows [6];
    wr_rd_t.delete(); wr_rd_a.delete(); v_rd_t.delete(); v_rd_a.delete();
    w_wr_a.delete(); v_wr_a.delete(); i_wr_a.delete();
    P = (B > 8) ? B : 8;
    rows[0] = 0; rows[1] = XROWS[0]; rows[2] = XROWS[1];
    rows[3] = HROWS[0]; rows[4] = HROWS[1]; rows[5] = HROWS[2];
    cfg = '0;
    cfg.dx = DX; cfg.dh = DH; cfg.batch = 5'(B); cfg.sparse_en = 1; cfg.thr = 4;
    cfg.nx = 2; cfg.nh = 3; cfg.w_base = 1000; cfg.c_base = CB;
    cfg.x_idx_base = 100; cfg.x_val_base = 3000; cfg.h_idx_rd = 200; cfg.h_val_rd = 4000;
    cfg.h_idx_wr = 50; cfg.h_val_wr = 6000;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    // weight fetches: per block, per column, 8 consecutive group words
    nblk = 2; n = 0;
    t0 = wr_rd_t[0];
    for (int bk = 0; bk < nblk; bk++) begin
      int tb;
      // first fetch of this block
      while (n < wr_rd_a.size() && wr_rd_a[n] >= CB) n++;
      tb = wr_rd_t[n];
      for (int c = 0; c < 6; c++)
        for (int g = 0; g < 8; g++) begin
          chk(wr_rd_a[n] == 1000 + (bk * ROWS + rows[c]) * 8 + g,
              $sformatf("B=%0d blk %0d col %0d grp %0d: addr %0d", B, bk, c, g, wr_rd_a[n]));
          chk(wr_rd_t[n] == tb + c * P + g, $sformatf("B=%0d blk %0d col %0d grp %0d: clock", B, bk, c, g));
          n++;
        end
      // c(t-1) reads: two words per batch
      for (int b = 0; b < B; b++)
        for (int h = 0; h < 2; h++) begin
          chk(wr_rd_a[n] == CB + (bk * 16 + b) * 2 + h, $sformatf("B=%0d c read blk %0d b %0d", B, bk, b));
          n++;
        end
    end
    chk(n == wr_rd_a.size(), "no extra wide reads");
    // input reads: the bias is not fetched
    n = 0;
    for (int bk = 0; bk < nblk; bk++)
      for (int c = 1; c < 6; c++)
        for (int b = 0; b < B; b++) begin
          int base;
          base = (c <= 2) ? 3000 + (c - 1) * 16 : 4000 + (c - 3) * 16;
          chk(v_rd_a[n] == base + b, $sformatf("B=%0d value read blk %0d col %0d b %0d", B, bk, c, b));
          n++;
        end
    chk(n == v_rd_a.size(), "no extra value reads");
    // c_t writes
    n = 0;
    for (int bk = 0; bk < nblk; bk++)
      for (int b = 0; b < B; b++)
        for (int h = 0; h < 2; h++) begin
          chk(w_wr_a[n] == CB + (bk * 16 + b) * 2 + h, $sformatf("B=%0d c write", B));
          n++;
        end
    // kept units: lanes l%5==0 of 48 and of the 22 of block 1
    kept_lane = 0; e_cyc = 0;
    for (int j = 0; j < DH; j++) begin
      bit k;
      k = ((j % 48) % 5) == 0;
      e_cyc += k ? B : 1;
      if (k) begin
        chk(i_wr_a[kept_lane] == 50 + kept_lane, $sformatf("B=%0d offset write %0d", B, kept_lane));
        for (int b = 0; b < B; b++)
          chk(v_wr_a[kept_lane * B + b] == 6000 + kept_lane * 16 + b,
              $sformatf("B=%0d h write %0d/%0d", B, kept_lane, b));
        kept_lane++;
      end
    end
    chk(i_wr_a.size() == kept_lane && v_wr_a.size() == kept_lane * B, "write counts");
    chk(stat_cycles == 32'(nblk * (6 * P + 12 + 11 * B + 4) + e_cyc),
        $sformatf("B=%0d cycles %0d want %0d", B, stat_cycles, nblk * (6 * P + 12 + 11 * B + 4) + e_cyc));
    chk(stat_columns == 32'(nblk * 6), "columns");
  endtask

  initial begin
    cyc = 0; rst_n = 0; start = 0; cfg = '0;
    for (int l = 0; l < 48; l++) h_nz[l] = (l % 5) == 0;
    for (int i = 0; i < 256; i++) imem[i] = 0;
    imem[100] = 1; imem[101] = 2;
    imem[200] = 0; imem[201] = 5; imem[202] = 20;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3);
    run(12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
