// tb_pe: drives the processing element with random commands, one per clock:
// multiply-accumulate onto a scratch entry, start a new sum, add an external
// 12-bit operand, with and without write-back, and idle clocks. A model of
// the multiplier (Q2.5 x Q2.5 -> Q6.5), the saturating 12-bit adder and the
// 16-entry memory predicts `out`, which must appear exactly two clocks after
// each command and hold over idle clocks. Large operands force saturation.
module tb_pe;
  import lstm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic     rst_n;
  grp_cmd_t cmd;
  data_t    a, b;
  acc_t     ext, out;
  int checks = 0, failures = 0, sats = 0;
  int mem [16];
  int pend [1];
  int last_out;

  pe dut (.*);

  function automatic int s12(input int v);
    return (v > 2047) ? 2047 : (v < -2048) ? -2048 : v;
  endfunction

  initial begin
    int prev_addr;
    bit prev_wr;
    rst_n = 0; cmd = '0; a = 0; b = 0; ext = 0;
    for (int i = 0; i < 16; i++) mem[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // clear all entries
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      cmd = '{valid: 1'b1, wr: 1'b1, addr: 4'(i), add_sel: ADD_ZERO}; a = 0; b = 0;
    end
    @(negedge clk); cmd = '0;
    repeat (3) @(negedge clk);
    last_out = 0; pend[0] = 0; prev_addr = -1; prev_wr = 0;
    for (int i = 0; i < 3000; i++) begin
      int addr, e, p, sel;
      bit big;
      addr = $urandom % 16;
      if (prev_wr && addr == prev_addr) addr = (addr + 1) % 16;
      sel = $urandom % 3;
      big = ($urandom % 4) == 0;
      a   = data_t'(big ? $urandom : ($urandom % 65) - 32);
      b   = data_t'(big ? $urandom : ($urandom % 65) - 32);
      ext = acc_t'($urandom);
      cmd.valid   = ($urandom % 5) != 0;
      cmd.wr      = ($urandom % 3) != 0;
      cmd.addr    = 4'(addr);
      cmd.add_sel = add_sel_e'(sel);
      p = (int'(a) * int'(b)) >>> 5;
      e = s12(p + ((sel == 1) ? mem[addr] : (sel == 2) ? int'(ext) : 0));
      if (cmd.valid) begin
        if (e == 2047 || e == -2048) sats++;
        if (cmd.wr) mem[addr] = e;
        last_out = e;
      end
      prev_addr = addr; prev_wr = cmd.valid && cmd.wr;
      @(posedge clk); #1;
      // after this edge `out` holds the result of the previous clock's command:
      // issued in clock c, visible from clock c+2
      if (i >= 1) begin
        checks++;
        if (int'(out) != pend[0]) begin
          failures++;
          if (failures < 10) $display("FAIL clock %0d: out=%0d want %0d", i, out, pend[0]);
        end
      end
      pend[0] = last_out;
      @(negedge clk);
    end
    checks++;
    if (sats == 0) begin failures++; $display("FAIL no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
