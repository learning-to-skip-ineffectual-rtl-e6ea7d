// local_router: operand selection inside one tile.
//
// Every PE of a tile can take its multiplier operands from the off-chip
// stream (the broadcast input element and the weight register of its group),
// from the tile's own sigmoid/tanh outputs, or from another tile / the input
// registers through the global router. The source names the local router and
// says PEs can take inputs from these places; the exact selection set below
// is this design's own.
//
// Lanes are split into groups of BW_W (24) PEs. During accumulation each
// group works on a different batch in the same clock (the batch pipeline), so
// the per-group command is expanded here to the PEs of that group.
//
// Interface: all inputs are from registers of the surrounding blocks; the
// router itself is combinational and adds no clock of latency.
module local_router
  import lstm_pkg::*;
#(
  parameter int unsigned NPE  = N_PE,
  parameter int unsigned GRPW = BW_W
) (
  input  a_sel_e   a_sel,
  input  b_sel_e   b_sel,
  input  grp_cmd_t grp_cmd  [NPE/GRPW],
  input  data_t    grp_in   [NPE/GRPW],   // broadcast input element per group
  input  data_t    weight   [NPE],
  input  data_t    own_act  [NPE],
  input  data_t    remote_a [NPE],
  input  data_t    remote_b [NPE],
  output grp_cmd_t pe_cmd   [NPE],
  output data_t    pe_a     [NPE],
  output data_t    pe_b     [NPE]
);

  always_comb begin
    for (int l = 0; l < NPE; l++) begin
      pe_cmd[l] = grp_cmd[l / GRPW];
      unique case (a_sel)
        A_INPUT:  pe_a[l] = grp_in[l / GRPW];
        A_OWNACT: pe_a[l] = own_act[l];
        A_REMOTE: pe_a[l] = remote_a[l];
        default:  pe_a[l] = '0;
      endcase
      unique case (b_sel)
        B_WEIGHT: pe_b[l] = weight[l];
        B_REMOTE: pe_b[l] = remote_b[l];
        B_ONE:    pe_b[l] = ONE;
        default:  pe_b[l] = '0;
      endcase
    end
  end

endmodule
