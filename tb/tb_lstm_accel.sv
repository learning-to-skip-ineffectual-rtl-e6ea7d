// tb_lstm_accel: end-to-end test of the accelerator on three small workloads
// run side by side, each over several time steps:
//   r0: one-hot x, 60 hidden units (a full and a partial block of 48),
//       batch 3 (weight bandwidth limits: one column per 8 clocks), pruning;
//   r1: real-valued x, 48 units, batch 10 (one column per 10 clocks, every PE
//       busy), pruning;
//   r2: dense mode, no pruning, every column kept.
// Each run checks every stored h, c and offset and the clock count of every
// step (see lstm_run). The test also fails if a mechanism never happened:
// skipped all-zero columns, bandwidth-limited and PE-limited periods, dense
// mode, a partial block.
module tb_lstm_accel;
  import lstm_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks, failures;
  logic fin [3];
  int c [3], f [3], sk [3], bw [3], fu [3], de [3], pb [3], sa [3], cy [3];

  lstm_run #(.DX(8), .DH(60), .B(3),  .STEPS(3), .SPARSE(1), .THR(8), .ONEHOT(1), .SEED(11))
    r0 (.clk, .finished(fin[0]), .checks(c[0]), .failures(f[0]), .skipped_cols(sk[0]),
        .bw_bound_steps(bw[0]), .full_steps(fu[0]), .dense_steps(de[0]),
        .partial_blocks(pb[0]), .sat_events(sa[0]), .cycles(cy[0]));
  lstm_run #(.DX(6), .DH(48), .B(10), .STEPS(3), .SPARSE(1), .THR(6), .ONEHOT(0), .SEED(22))
    r1 (.clk, .finished(fin[1]), .checks(c[1]), .failures(f[1]), .skipped_cols(sk[1]),
        .bw_bound_steps(bw[1]), .full_steps(fu[1]), .dense_steps(de[1]),
        .partial_blocks(pb[1]), .sat_events(sa[1]), .cycles(cy[1]));
  lstm_run #(.DX(5), .DH(50), .B(2),  .STEPS(2), .SPARSE(0), .THR(8), .ONEHOT(1), .SEED(33))
    r2 (.clk, .finished(fin[2]), .checks(c[2]), .failures(f[2]), .skipped_cols(sk[2]),
        .bw_bound_steps(bw[2]), .full_steps(fu[2]), .dense_steps(de[2]),
        .partial_blocks(pb[2]), .sat_events(sa[2]), .cycles(cy[2]));

  task automatic need(input int count, input string what);
    checks++;
    $display("  %-40s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    checks = 0; failures = 0;
    @(posedge clk);   // let the runs clear their flags first
    wait (fin[0] === 1'b1 && fin[1] === 1'b1 && fin[2] === 1'b1);
    for (int i = 0; i < 3; i++) begin
      checks += c[i]; failures += f[i];
      $display("run %0d: %0d checks, %0d failures, %0d clocks", i, c[i], f[i], cy[i]);
    end
    need(sk[0] + sk[1], "all-zero hidden columns skipped");
    need(bw[0] + bw[2], "bandwidth-limited steps (B < 8)");
    need(fu[1], "PE-limited steps (B >= 8)");
    need(de[2], "dense-mode steps");
    need(pb[0] + pb[2], "steps with a partial block");
    $display("  %-40s %0d", "saturated sums (informative)", sa[0] + sa[1] + sa[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
