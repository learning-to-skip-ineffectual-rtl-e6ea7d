// tile: 48 processing elements, 48 sigmoid/tanh units and a local router.
//
// Each tile produces one LSTM gate for a block of 48 hidden units: tiles 0-2
// (the paper's tiles #1-#3) hold the f, i and o gates and use the sigmoid,
// tile 3 (#4) holds the candidate g and uses tanh. During accumulation every
// PE adds weight x input into the scratch entry of the current batch; after
// accumulation the same PEs, fed through the routers, compute the Hadamard
// products of the cell update (see lstm_accel).
//
// Interface: `cmd` selects the operand sources for all lanes and latches the
// activation outputs (act_en); `grp_cmd` gives valid/write/batch address per
// group of 24 PEs. pe_out is valid two clocks after a command (see pe);
// act_out is loaded in the clock act_en is high, from the current pe_out.
// The PE + activation structure is the source's; the registered activation
// output is this design's choice.
module tile
  import lstm_pkg::*;
#(
  parameter bit          IS_TANH = 1'b0,
  parameter int unsigned NPE     = N_PE,
  parameter int unsigned GRPW    = BW_W
) (
  input  logic      clk,
  input  logic      rst_n,
  input  tile_cmd_t cmd,
  input  grp_cmd_t  grp_cmd  [NPE/GRPW],
  input  data_t     grp_in   [NPE/GRPW],
  input  data_t     weight   [NPE],
  input  data_t     remote_a [NPE],
  input  data_t     remote_b [NPE],
  input  acc_t      ext      [NPE],
  output acc_t      pe_out   [NPE],
  output data_t     act_out  [NPE]
);

  grp_cmd_t pe_cmd [NPE];
  data_t    pe_a   [NPE];
  data_t    pe_b   [NPE];
  data_t    act_y  [NPE];

  local_router #(.NPE(NPE), .GRPW(GRPW)) u_lr (
    .a_sel    (cmd.a_sel),
    .b_sel    (cmd.b_sel),
    .grp_cmd  (grp_cmd),
    .grp_in   (grp_in),
    .weight   (weight),
    .own_act  (act_out),
    .remote_a (remote_a),
    .remote_b (remote_b),
    .pe_cmd   (pe_cmd),
    .pe_a     (pe_a),
    .pe_b     (pe_b)
  );

  for (genvar l = 0; l < NPE; l++) begin : g_lane
    pe u_pe (
      .clk   (clk),
      .rst_n (rst_n),
      .cmd   (pe_cmd[l]),
      .a     (pe_a[l]),
      .b     (pe_b[l]),
      .ext   (ext[l]),
      .out   (pe_out[l])
    );

    act_unit u_act (
      .x        (pe_out[l]),
      .tanh_sel (IS_TANH),
      .y        (act_y[l])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          act_out[l] <= '0;
      else if (cmd.act_en) act_out[l] <= act_y[l];
    end
  end

endmodule
