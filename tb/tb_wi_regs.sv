// tb_wi_regs: loads random weight words into random groups and c(t-1) words
// into both halves, and pushes tagged input elements into the pipeline,
// checking that weight register g holds the last word loaded for g, that
// creg holds both halves, and that stage g shows exactly what entered g+1
// clocks earlier (value, batch, first flag and valid).
module tb_wi_regs;
  import lstm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  data_t wide_data [24];
  logic w_load, c_load, in_valid, in_first;
  logic [2:0] w_grp;
  logic c_half;
  logic [3:0] in_batch;
  data_t in_data;
  data_t weight [8][24];
  logic st_valid [8], st_first [8];
  logic [3:0] st_batch [8];
  data_t st_data [8];
  data_t creg [48];
  int checks = 0, failures = 0;
  data_t mw [8][24];
  data_t mc [48];
  int hv [0:4095], hb [0:4095], hf [0:4095], hd [0:4095];

  wi_regs dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    rst_n = 0; w_load = 0; c_load = 0; in_valid = 0; in_first = 0; w_grp = 0; c_half = 0;
    in_batch = 0; in_data = 0;
    foreach (wide_data[i]) wide_data[i] = 0;
    for (int g = 0; g < 8; g++) for (int l = 0; l < 24; l++) mw[g][l] = 0;
    for (int l = 0; l < 48; l++) mc[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      foreach (wide_data[i]) wide_data[i] = data_t'($urandom);
      w_load = $urandom % 2; w_grp = 3'($urandom);
      c_load = !w_load && ($urandom % 2); c_half = $urandom % 2;
      in_valid = $urandom % 2; in_first = $urandom % 2;
      in_batch = 4'($urandom); in_data = data_t'($urandom);
      hv[t] = in_valid; hf[t] = in_first; hb[t] = in_batch; hd[t] = in_data;
      if (w_load) foreach (wide_data[i]) mw[w_grp][i] = wide_data[i];
      if (c_load) foreach (wide_data[i]) mc[c_half * 24 + i] = wide_data[i];
      @(posedge clk); #1;
      for (int g = 0; g < 8; g++) begin
        for (int l = 0; l < 24; l++) chk(weight[g][l] == mw[g][l], $sformatf("t %0d weight[%0d][%0d]", t, g, l));
        if (t >= g) begin
          chk(st_valid[g] == hv[t - g][0], $sformatf("t %0d stage %0d valid", t, g));
          chk(st_first[g] == hf[t - g][0], $sformatf("t %0d stage %0d first", t, g));
          chk(st_batch[g] == 4'(hb[t - g]), $sformatf("t %0d stage %0d batch", t, g));
          chk(st_data[g] == data_t'(hd[t - g]), $sformatf("t %0d stage %0d data", t, g));
        end
      end
      for (int l = 0; l < 48; l++) chk(creg[l] == mc[l], $sformatf("t %0d creg[%0d]", t, l));
      @(negedge clk);
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
