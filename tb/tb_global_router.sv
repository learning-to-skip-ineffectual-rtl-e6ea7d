// tb_global_router: random register, activation and PE-output contents with
// random routing commands. In accumulation mode it checks that group g
// (tile g/2, half g%2) gets input stage g, weight register g and a command
// built from the stage's tags (write the batch entry; start a new sum on the
// first column). In element-wise mode it checks the controller's commands
// pass through and that each remote operand comes from c(t-1), another
// tile's activations or another tile's (saturated) PE outputs as selected.
module tb_global_router;
  import lstm_pkg::*;
  logic mac_mode;
  tile_cmd_t tcmd [4];
  grp_cmd_t had_cmd [4];
  data_t weight [8][24];
  logic st_valid [8], st_first [8];
  logic [3:0] st_batch [8];
  data_t st_data [8];
  data_t creg [48];
  data_t act [4][48];
  acc_t pe_out [4][48];
  grp_cmd_t t_grp_cmd [4][2];
  data_t t_grp_in [4][2];
  data_t t_weight [4][48], t_remote_a [4][48], t_remote_b [4][48];
  acc_t t_ext [4][48];
  int checks = 0, failures = 0;

  global_router dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic int s8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  function automatic int src(input src_e s, input int t, input int l);
    case (s)
      SRC_CREG: return int'(creg[l]);
      SRC_ACT:  return int'(act[t][l]);
      SRC_OUT:  return s8(int'(pe_out[t][l]));
      default:  return 0;
    endcase
  endfunction

  initial begin
    for (int it = 0; it < 60; it++) begin
      mac_mode = it % 2;
      for (int g = 0; g < 8; g++) begin
        st_valid[g] = $urandom % 2; st_first[g] = $urandom % 2;
        st_batch[g] = 4'($urandom); st_data[g] = data_t'($urandom);
        for (int l = 0; l < 24; l++) weight[g][l] = data_t'($urandom);
      end
      for (int l = 0; l < 48; l++) creg[l] = data_t'($urandom);
      for (int t = 0; t < 4; t++) begin
        had_cmd[t] = grp_cmd_t'($urandom);
        tcmd[t] = tile_cmd_t'($urandom);
        tcmd[t].ra_src = src_e'($urandom % 4);
        tcmd[t].rb_src = src_e'($urandom % 4);
        for (int l = 0; l < 48; l++) begin
          act[t][l] = data_t'($urandom); pe_out[t][l] = acc_t'($urandom);
        end
      end
      #1;
      for (int t = 0; t < 4; t++) begin
        for (int h = 0; h < 2; h++) begin
          int g;
          g = 2 * t + h;
          chk(t_grp_in[t][h] == st_data[g], $sformatf("it %0d grp_in %0d", it, g));
          if (mac_mode) begin
            chk(t_grp_cmd[t][h].valid == st_valid[g] && t_grp_cmd[t][h].wr &&
                t_grp_cmd[t][h].addr == st_batch[g] &&
                t_grp_cmd[t][h].add_sel == (st_first[g] ? ADD_ZERO : ADD_SCRATCH),
                $sformatf("it %0d mac cmd group %0d", it, g));
          end else begin
            chk(t_grp_cmd[t][h] == had_cmd[t], $sformatf("it %0d had cmd tile %0d", it, t));
          end
        end
        for (int l = 0; l < 48; l++) begin
          chk(t_weight[t][l] == weight[2 * t + l / 24][l % 24], $sformatf("it %0d weight %0d/%0d", it, t, l));
          chk(int'(t_remote_a[t][l]) == src(tcmd[t].ra_src, tcmd[t].ra_tile, l),
              $sformatf("it %0d remote_a %0d/%0d", it, t, l));
          chk(int'(t_remote_b[t][l]) == src(tcmd[t].rb_src, tcmd[t].rb_tile, l),
              $sformatf("it %0d remote_b %0d/%0d", it, t, l));
          chk(t_ext[t][l] == pe_out[tcmd[t].ext_tile][l], $sformatf("it %0d ext %0d/%0d", it, t, l));
        end
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
