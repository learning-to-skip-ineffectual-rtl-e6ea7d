// act_unit: the sigmoid / tanh unit that follows each PE of a tile.
//
// The source places one "sig./tanh" unit behind every PE: the tiles of the
// f, i and o gates use the logistic sigmoid and the tile of the candidate g
// uses tanh, which is also reused for tanh(c_t). The source does not say how
// the functions are built; this unit uses the well-known piecewise-linear
// PLAN approximation of the sigmoid, whose slopes are powers of two, so it is
// only shifts, adds and comparisons:
//   |x| >= 5        : 1
//   2.375 <= |x| < 5: |x|/32 + 0.84375
//   1 <= |x| < 2.375: |x|/8  + 0.625
//   |x| < 1         : |x|/4  + 0.5
//   sigmoid(-x) = 1 - sigmoid(x)
// and tanh(x) = 2*sigmoid(2x) - 1.
//
// Interface: x is the 12-bit Q6.5 sum of a PE, y the 8-bit Q2.5 result.
// tanh_sel selects tanh. Purely combinational; the tile registers y.
module act_unit
  import lstm_pkg::*;
(
  input  acc_t  x,
  input  logic  tanh_sel,
  output data_t y
);

  // positive half of the PLAN sigmoid, magnitude in Q.5, result in Q.5 (16..32)
  function automatic logic [5:0] plan_pos(input logic [ACC_W+1:0] m);
    if (m >= 14'd160)      return 6'd32;
    else if (m >= 14'd76)  return 6'(m >> 5) + 6'd27;
    else if (m >= 14'd32)  return 6'(m >> 3) + 6'd20;
    else                   return 6'(m >> 2) + 6'd16;
  endfunction

  always_comb begin
    logic              neg;
    logic [ACC_W:0]    mag;
    logic [5:0]        s;
    logic signed [7:0] t;
    t   = '0;
    s   = '0;
    neg = x[ACC_W-1];
    mag = neg ? (ACC_W+1)'(-$signed({x[ACC_W-1], x})) : (ACC_W+1)'(x);
    if (tanh_sel) begin
      s = plan_pos({mag, 1'b0});
      t = 8'(2 * s) - 8'sd32;            // tanh(|x|) in Q2.5, 0..32
      y = neg ? -t : t;
    end else begin
      s = plan_pos({1'b0, mag});
      y = neg ? data_t'(8'd32 - 8'(s)) : data_t'(s);
    end
  end

endmodule
