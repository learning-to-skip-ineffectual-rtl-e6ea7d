// tb_encoder: feeds random patterns of zero / non-zero columns (with random
// idle clocks between them) to the encoder in sparse and in dense mode, and
// checks every emitted offset and index against a counting model, the kept
// and skipped totals, and that `clear` restarts the counts.
module tb_encoder;
  import lstm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, clear, sparse_en, col_valid, col_nonzero, emit;
  logic [CNT_W-1:0] offset, index, kept, skipped;
  int checks = 0, failures = 0;

  encoder dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    rst_n = 0; clear = 0; sparse_en = 1; col_valid = 0; col_nonzero = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      int run, nk, ns;
      @(negedge clk);
      clear = 1; sparse_en = (mode == 0);
      @(negedge clk);
      clear = 0;
      run = 0; nk = 0; ns = 0;
      for (int i = 0; i < 300; i++) begin
        col_valid   = ($urandom % 4) != 0;
        col_nonzero = ($urandom % 5) == 0;
        #1;
        if (col_valid && (col_nonzero || mode == 1)) begin
          chk(emit == 1'b1, "emit expected");
          chk(offset == CNT_W'(run), $sformatf("offset %0d want %0d", offset, run));
          chk(index == CNT_W'(nk), "index");
          run = 0; nk++;
        end else begin
          chk(emit == 1'b0, "no emit expected");
          if (col_valid) begin run++; ns++; end
        end
        @(negedge clk);
      end
      col_valid = 0;
      #1;
      chk(kept == CNT_W'(nk), $sformatf("kept %0d want %0d", kept, nk));
      chk(skipped == CNT_W'(ns), $sformatf("skipped %0d want %0d", skipped, ns));
      if (mode == 1) chk(skipped == 0, "dense mode skips nothing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
