// tb_local_router: applies random operand vectors and every combination of
// the A and B selections, and checks each lane's operands and that each
// lane receives the command of its own group of 24.
module tb_local_router;
  import lstm_pkg::*;
  a_sel_e   a_sel;
  b_sel_e   b_sel;
  grp_cmd_t grp_cmd [2];
  data_t    grp_in  [2];
  data_t    weight [48], own_act [48], remote_a [48], remote_b [48];
  grp_cmd_t pe_cmd [48];
  data_t    pe_a [48], pe_b [48];
  int checks = 0, failures = 0;

  local_router #(.NPE(48), .GRPW(24)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int it = 0; it < 40; it++) begin
      for (int g = 0; g < 2; g++) begin
        grp_cmd[g] = grp_cmd_t'($urandom);
        grp_in[g]  = data_t'($urandom);
      end
      for (int l = 0; l < 48; l++) begin
        weight[l] = data_t'($urandom); own_act[l] = data_t'($urandom);
        remote_a[l] = data_t'($urandom); remote_b[l] = data_t'($urandom);
      end
      a_sel = a_sel_e'(it % 4);
      b_sel = b_sel_e'((it / 4) % 4);
      #1;
      for (int l = 0; l < 48; l++) begin
        data_t ea, eb;
        ea = (a_sel == A_INPUT) ? grp_in[l / 24] : (a_sel == A_OWNACT) ? own_act[l] :
             (a_sel == A_REMOTE) ? remote_a[l] : data_t'(0);
        eb = (b_sel == B_WEIGHT) ? weight[l] : (b_sel == B_REMOTE) ? remote_b[l] :
             (b_sel == B_ONE) ? data_t'(32) : data_t'(0);
        chk(pe_a[l] == ea, $sformatf("it %0d lane %0d A", it, l));
        chk(pe_b[l] == eb, $sformatf("it %0d lane %0d B", it, l));
        chk(pe_cmd[l] == grp_cmd[l / 24], $sformatf("it %0d lane %0d cmd", it, l));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
