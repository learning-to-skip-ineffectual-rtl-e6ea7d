// pe: one processing element of a tile.
//
// A PE is an 8x8-bit signed multiplier followed by a 12-bit adder whose second
// operand is a word of the PE's own scratch memory (to accumulate one batch's
// partial sum), zero (to start a new sum) or a 12-bit value brought in from
// another tile (for the addition step of the cell-state update). The sum can
// be written back to the scratch memory and is always latched on `out`, which
// feeds the tile's sigmoid/tanh unit and the routers.
//
// The multiplier/adder/scratch-memory structure follows the source. The number
// formats are this design's choice: operands are Q2.5, the product is shifted
// right by FRAC=5 to Q6.5, and the addition saturates to 12 bits.
//
// Timing: two stages. A command presented in clock c reads the scratch memory
// (synchronous) and registers the operands; in clock c+1 the product and sum
// are formed, the write happens and `out` is loaded, so `out` is valid from
// clock c+2. The same scratch address must not be written in clock c+1 and
// read in clock c+1 again (the controller keeps at least 8 clocks between two
// accesses to the same batch entry during accumulation).
module pe
  import lstm_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  grp_cmd_t  cmd,
  input  data_t     a,
  input  data_t     b,
  input  acc_t      ext,
  output acc_t      out
);

  grp_cmd_t cmd_q;
  data_t    a_q, b_q;
  acc_t     ext_q;
  acc_t     rdata;
  acc_t     sum;

  scratch_mem #(.DEPTH(N_BATCH), .WIDTH(ACC_W)) u_mem (
    .clk   (clk),
    .we    (cmd_q.valid && cmd_q.wr),
    .waddr (cmd_q.addr),
    .wdata (sum),
    .rd_en (cmd.valid && cmd.add_sel == ADD_SCRATCH),
    .raddr (cmd.addr),
    .rdata (rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_q <= '0;
      a_q   <= '0;
      b_q   <= '0;
      ext_q <= '0;
    end else begin
      cmd_q <= cmd;
      a_q   <= a;
      b_q   <= b;
      ext_q <= ext;
    end
  end

  always_comb begin
    logic signed [2*DATA_W-1:0] prod;
    logic signed [ACC_W-1:0]    prod_s;
    acc_t                       addend;
    prod   = a_q * b_q;
    prod_s = ACC_W'(prod >>> FRAC);   // |a*b| <= 2^14, so the shifted value fits 12 bits
    unique case (cmd_q.add_sel)
      ADD_SCRATCH: addend = rdata;
      ADD_EXT:     addend = ext_q;
      default:     addend = '0;
    endcase
    sum = sat12((ACC_W+1)'(prod_s) + (ACC_W+1)'(addend));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           out <= '0;
    else if (cmd_q.valid) out <= sum;
  end

endmodule
