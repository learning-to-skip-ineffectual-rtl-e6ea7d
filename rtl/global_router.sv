// global_router: distributes operands to the four tiles.
//
// In accumulation mode (mac_mode=1) group g of the 8 PE groups (tile g/2,
// half g%2) receives stage g of the input pipeline and weight register g, and
// its command comes from the tags travelling with that input: write the
// batch's scratch entry, starting a new sum on the first column (the bias).
// In the element-wise phase (mac_mode=0) each tile gets the command issued by
// the controller, and remote vectors that let one tile use another tile's
// activation outputs or PE outputs, or the c(t-1) register, as operands.
// This is how the source moves i and g into one tile, f*c and i*g into the
// g tile for the addition, and tanh(c_t) into the o tile.
//
// The source names the global router and says PEs can take inputs from any
// tile's scratch memory or from off-chip; the source enumeration below is this
// design's. Purely combinational.
module global_router
  import lstm_pkg::*;
#(
  parameter int unsigned NT   = N_TILES,
  parameter int unsigned NPE  = N_PE,
  parameter int unsigned GRPW = BW_W
) (
  input  logic               mac_mode,
  input  tile_cmd_t          tcmd     [NT],
  input  grp_cmd_t           had_cmd  [NT],
  // from the weight/input registers
  input  data_t              weight   [NT*NPE/GRPW][GRPW],
  input  logic               st_valid [NT*NPE/GRPW],
  input  logic               st_first [NT*NPE/GRPW],
  input  logic [BATCH_W-1:0] st_batch [NT*NPE/GRPW],
  input  data_t              st_data  [NT*NPE/GRPW],
  input  data_t              creg     [NPE],
  // from the tiles
  input  data_t              act      [NT][NPE],
  input  acc_t               pe_out   [NT][NPE],
  // to the tiles
  output grp_cmd_t           t_grp_cmd  [NT][NPE/GRPW],
  output data_t              t_grp_in   [NT][NPE/GRPW],
  output data_t              t_weight   [NT][NPE],
  output data_t              t_remote_a [NT][NPE],
  output data_t              t_remote_b [NT][NPE],
  output acc_t               t_ext      [NT][NPE]
);

  localparam int unsigned GPT = NPE / GRPW;   // groups per tile

  always_comb begin
    for (int t = 0; t < NT; t++) begin
      for (int h = 0; h < GPT; h++) begin
        t_grp_in[t][h] = st_data[t * GPT + h];
        if (mac_mode) begin
          t_grp_cmd[t][h].valid   = st_valid[t * GPT + h];
          t_grp_cmd[t][h].wr      = 1'b1;
          t_grp_cmd[t][h].addr    = st_batch[t * GPT + h];
          t_grp_cmd[t][h].add_sel = st_first[t * GPT + h] ? ADD_ZERO : ADD_SCRATCH;
        end else begin
          t_grp_cmd[t][h] = had_cmd[t];
        end
      end
      for (int l = 0; l < NPE; l++) begin
        t_weight[t][l]   = weight[t * GPT + l / GRPW][l % GRPW];
        unique case (tcmd[t].ra_src)
          SRC_CREG: t_remote_a[t][l] = creg[l];
          SRC_ACT:  t_remote_a[t][l] = act[tcmd[t].ra_tile][l];
          SRC_OUT:  t_remote_a[t][l] = sat8(pe_out[tcmd[t].ra_tile][l]);
          default:  t_remote_a[t][l] = '0;
        endcase
        unique case (tcmd[t].rb_src)
          SRC_CREG: t_remote_b[t][l] = creg[l];
          SRC_ACT:  t_remote_b[t][l] = act[tcmd[t].rb_tile][l];
          SRC_OUT:  t_remote_b[t][l] = sat8(pe_out[tcmd[t].rb_tile][l]);
          default:  t_remote_b[t][l] = '0;
        endcase
        t_ext[t][l]      = pe_out[tcmd[t].ext_tile][l];
      end
    end
  end

endmodule
