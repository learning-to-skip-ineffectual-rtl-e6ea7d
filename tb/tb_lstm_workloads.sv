// tb_lstm_workloads: the accelerator as built, on the two smaller layers of
// the evaluation, run side by side on separate instances:
//   word-level language model: 300 hidden units, 300 real-valued embedding
//     inputs, batch 8 (7 blocks, the last one 12 units wide), with pruning;
//   pixel-by-pixel digit classifier: 100 hidden units, one input per step,
//     batch 16, with pruning.
// Each runs a few time steps; every stored h, c and offset and each step's
// clock count are checked against the reference model in lstm_run, and a
// failure is counted if no hidden column was ever skipped.
module tb_lstm_workloads;
  import lstm_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic fin [2];
  int c [2], f [2], sk [2], bw [2], fu [2], de [2], pb [2], sa [2], cy [2];
  int checks = 0, failures = 0;

  lstm_run #(.DX(300), .DH(300), .B(8), .STEPS(2), .SPARSE(1), .THR(10), .ONEHOT(0),
             .SEED(41), .VERBOSE(1))
    r_word (.clk, .finished(fin[0]), .checks(c[0]), .failures(f[0]), .skipped_cols(sk[0]),
            .bw_bound_steps(bw[0]), .full_steps(fu[0]), .dense_steps(de[0]),
            .partial_blocks(pb[0]), .sat_events(sa[0]), .cycles(cy[0]));

  lstm_run #(.DX(1), .DH(100), .B(16), .STEPS(4), .SPARSE(1), .THR(10), .ONEHOT(0),
             .SEED(42), .VERBOSE(1))
    r_pix (.clk, .finished(fin[1]), .checks(c[1]), .failures(f[1]), .skipped_cols(sk[1]),
           .bw_bound_steps(bw[1]), .full_steps(fu[1]), .dense_steps(de[1]),
           .partial_blocks(pb[1]), .sat_events(sa[1]), .cycles(cy[1]));

  initial begin
    @(posedge clk);
    wait (fin[0] === 1'b1 && fin[1] === 1'b1);
    for (int i = 0; i < 2; i++) begin
      checks += c[i] + 1;
      failures += f[i];
      $display("run %0d: %0d clocks, %0d hidden columns skipped", i, cy[i], sk[i]);
      if (sk[i] == 0) begin failures++; $display("FAIL run %0d skipped no column", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
