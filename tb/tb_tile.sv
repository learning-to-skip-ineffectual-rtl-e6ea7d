// tb_tile: a sigmoid tile and a tanh tile side by side. Both accumulate
// 6 columns x 3 batches of random inputs and weights (the two halves of a
// tile get different inputs, as two PE groups do), then each batch's sum is
// read out, checked, passed through the activation unit and checked again
// against a model of the piecewise-linear functions. Finally the element-wise
// operations are checked: own activation x remote vector, and remote vector
// x 1.0 plus an external 12-bit operand.
module tb_tile;
  import lstm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  tile_cmd_t cmd;
  grp_cmd_t grp_cmd [2];
  data_t grp_in [2];
  data_t weight [48], remote_a [48], remote_b [48];
  acc_t ext [48];
  acc_t pe_out [2][48];
  data_t act_out [2][48];
  int checks = 0, failures = 0;
  localparam int K = 6, NB = 3;
  int w [K][48], x [NB][K][2];
  int acc [NB][48];
  int hold_act [2][48];

  for (genvar t = 0; t < 2; t++) begin : g_t
    tile #(.IS_TANH(t == 1)) dut (.clk, .rst_n, .cmd, .grp_cmd, .grp_in, .weight,
      .remote_a, .remote_b, .ext, .pe_out(pe_out[t]), .act_out(act_out[t]));
  end

  function automatic int s8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction
  function automatic int s12(input int v);
    return (v > 2047) ? 2047 : (v < -2048) ? -2048 : v;
  endfunction
  function automatic int sigp(input int m);
    if (m >= 160) return 32;
    if (m >= 76)  return (m >> 5) + 27;
    if (m >= 32)  return (m >> 3) + 20;
    return (m >> 2) + 16;
  endfunction
  function automatic int actm(input int v, input bit th);
    int t;
    if (!th) return (v < 0) ? 32 - sigp(-v) : sigp(v);
    t = 2 * sigp((v < 0 ? -v : v) * 2) - 32;
    return (v < 0) ? -t : t;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic idle();
    cmd = '{a_sel: A_INPUT, b_sel: B_WEIGHT, ra_src: SRC_NONE, ra_tile: 0,
            rb_src: SRC_NONE, rb_tile: 0, ext_tile: 0, act_en: 0};
    grp_cmd[0] = '0; grp_cmd[1] = '0;
  endtask

  initial begin
    rst_n = 0; idle();
    grp_in[0] = 0; grp_in[1] = 0;
    foreach (weight[l]) begin weight[l] = 0; remote_a[l] = 0; remote_b[l] = 0; ext[l] = 0; end
    for (int k = 0; k < K; k++) for (int l = 0; l < 48; l++) w[k][l] = ($urandom % 61) - 30;
    for (int b = 0; b < NB; b++) for (int k = 0; k < K; k++) for (int h = 0; h < 2; h++)
      x[b][k][h] = ($urandom % 97) - 48;
    for (int b = 0; b < NB; b++) for (int l = 0; l < 48; l++) begin
      acc[b][l] = 0;
      for (int k = 0; k < K; k++) acc[b][l] = s12(acc[b][l] + ((w[k][l] * x[b][k][l / 24]) >>> 5));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // accumulation
    for (int k = 0; k < K; k++)
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        idle();
        for (int h = 0; h < 2; h++) begin
          grp_cmd[h] = '{valid: 1, wr: 1, addr: 4'(b), add_sel: (k == 0) ? ADD_ZERO : ADD_SCRATCH};
          grp_in[h] = data_t'(x[b][k][h]);
        end
        foreach (weight[l]) weight[l] = data_t'(w[k][l]);
      end
    @(negedge clk); idle();
    repeat (2) @(negedge clk);
    // read out, then activation
    for (int b = 0; b < NB; b++) begin
      cmd.a_sel = A_ZERO; cmd.b_sel = B_ZERO;
      grp_cmd[0] = '{valid: 1, wr: 0, addr: 4'(b), add_sel: ADD_SCRATCH};
      grp_cmd[1] = grp_cmd[0];
      @(negedge clk); idle();
      @(negedge clk);
      for (int t = 0; t < 2; t++) for (int l = 0; l < 48; l++)
        chk(int'(pe_out[t][l]) == acc[b][l], $sformatf("sum tile %0d batch %0d lane %0d: %0d want %0d",
            t, b, l, pe_out[t][l], acc[b][l]));
      cmd.act_en = 1;
      @(negedge clk); idle();
      for (int t = 0; t < 2; t++) for (int l = 0; l < 48; l++) begin
        chk(int'(act_out[t][l]) == actm(acc[b][l], t == 1),
            $sformatf("act tile %0d batch %0d lane %0d", t, b, l));
        hold_act[t][l] = int'(act_out[t][l]);
      end
    end
    // own activation x remote vector
    foreach (remote_b[l]) remote_b[l] = data_t'($urandom);
    cmd.a_sel = A_OWNACT; cmd.b_sel = B_REMOTE;
    grp_cmd[0] = '{valid: 1, wr: 0, addr: 0, add_sel: ADD_ZERO}; grp_cmd[1] = grp_cmd[0];
    @(negedge clk); idle();
    @(negedge clk);
    for (int t = 0; t < 2; t++) for (int l = 0; l < 48; l++)
      chk(int'(pe_out[t][l]) == (hold_act[t][l] * int'(remote_b[l])) >>> 5,
          $sformatf("own act x remote tile %0d lane %0d", t, l));
    // remote x 1.0 + external
    foreach (remote_a[l]) begin remote_a[l] = data_t'($urandom); ext[l] = acc_t'($urandom); end
    cmd.a_sel = A_REMOTE; cmd.b_sel = B_ONE;
    grp_cmd[0] = '{valid: 1, wr: 0, addr: 0, add_sel: ADD_EXT}; grp_cmd[1] = grp_cmd[0];
    @(negedge clk); idle();
    @(negedge clk);
    for (int t = 0; t < 2; t++) for (int l = 0; l < 48; l++)
      chk(int'(pe_out[t][l]) == s12(int'(remote_a[l]) + int'(ext[l])),
          $sformatf("remote + ext tile %0d lane %0d", t, l));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
