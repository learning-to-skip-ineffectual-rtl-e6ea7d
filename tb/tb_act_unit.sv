// tb_act_unit: sweeps all 4096 inputs of the sigmoid/tanh unit in both
// modes. The expected value is the piecewise-linear approximation evaluated
// in real arithmetic and floored to 1/32 (sigmoid), or 2*sigmoid(2x)-1 built
// from it (tanh). It also checks that the approximation stays within 0.07
// (sigmoid) and 0.11 (tanh) of the exact functions, that the sigmoid is monotonic, and symmetry.
module tb_act_unit;
  import lstm_pkg::*;
  acc_t  x;
  logic  tanh_sel;
  data_t y;
  int checks = 0, failures = 0;

  act_unit dut (.*);

  function automatic real plan(input real v);
    real a, p;
    a = (v < 0) ? -v : v;
    if (a >= 5.0)        p = 1.0;
    else if (a >= 2.375) p = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   p = 0.125 * a + 0.625;
    else                 p = 0.25 * a + 0.5;
    return p;   // positive half
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int prev;
    for (int m = 0; m < 2; m++) begin
      prev = -1000;
      for (int i = -2048; i < 2048; i++) begin
        real v, exact, tol;
        int  sp, e;
        x = acc_t'(i); tanh_sel = (m == 1);
        #1;
        v = real'(i) / 32.0;
        tol = (m == 0) ? 0.07 : 0.11;   // tanh doubles the sigmoid's error
        if (m == 0) begin
          sp = $rtoi($floor(plan(v) * 32.0));
          e  = (i < 0) ? 32 - sp : sp;
          exact = 1.0 / (1.0 + $exp(-v));
          chk(int'(y) >= prev, $sformatf("sigmoid monotonic at %0d", i));
          prev = int'(y);
        end else begin
          sp = 2 * $rtoi($floor(plan(2.0 * v) * 32.0)) - 32;
          e  = (i < 0) ? -sp : sp;
          exact = (($exp(v) - $exp(-v)) / ($exp(v) + $exp(-v)));
        end
        chk(int'(y) == e, $sformatf("mode %0d x=%0d: y=%0d want %0d", m, i, y, e));
        chk((real'(y) / 32.0 - exact) < tol && (exact - real'(y) / 32.0) < tol,
            $sformatf("mode %0d x=%0d: error too large", m, i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
