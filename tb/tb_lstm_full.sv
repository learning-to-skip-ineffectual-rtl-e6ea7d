// tb_lstm_full: the accelerator as built, on a character-level language
// model layer of the size used for evaluation: 50 one-hot inputs, 1000
// hidden units (21 blocks of 48, the last one partial) and batch 16, over two
// time steps with pruning, so that the second step runs on the encoded,
// pruned h_(t-1). Every stored h, c and offset and each step's clock count
// are checked (see lstm_run).
module tb_lstm_full;
  import lstm_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic fin;
  int c, f, sk, bw, fu, de, pb, sa, cy;
  int checks = 0, failures = 0;

  lstm_run #(.DX(50), .DH(1000), .B(16), .STEPS(2), .SPARSE(1), .THR(10), .ONEHOT(1),
             .SEED(7), .VERBOSE(1))
    r (.clk, .finished(fin), .checks(c), .failures(f), .skipped_cols(sk),
       .bw_bound_steps(bw), .full_steps(fu), .dense_steps(de), .partial_blocks(pb),
       .sat_events(sa), .cycles(cy));

  initial begin
    @(posedge clk);
    wait (fin === 1'b1);
    checks = c + 1; failures = f;
    $display("%0d clocks, %0d hidden columns skipped, %0d saturated sums", cy, sk, sa);
    if (sk == 0) begin failures++; $display("FAIL no column was skipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
