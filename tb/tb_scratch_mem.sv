// tb_scratch_mem: writes random words to every entry of the 16 x 12-bit
// scratch memory and reads them back, checking the one-clock read latency,
// that a read in the clock of a write to the same entry returns the old
// word, and that rd_en=0 holds the read register.
module tb_scratch_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic        we, rd_en;
  logic [3:0]  waddr, raddr;
  logic [11:0] wdata, rdata;
  logic [11:0] model [16];
  int checks = 0, failures = 0;

  scratch_mem #(.DEPTH(16), .WIDTH(12)) dut (.*);

  task automatic chk(input logic [11:0] got, input logic [11:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h want %h", what, got, exp);
    end
  endtask

  initial begin
    we = 0; rd_en = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      we = 1; waddr = 4'(i); wdata = 12'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < 16; i++) begin
        int a;
        a = $urandom % 16;
        @(negedge clk); rd_en = 1; raddr = 4'(a);
        // same-clock write to the same entry: the read must see the old word
        we = (r == 1); waddr = 4'(a); wdata = 12'($urandom);
        @(posedge clk); #1;
        chk(rdata, model[a], $sformatf("read entry %0d", a));
        if (r == 1) model[a] = wdata;
      end
    @(negedge clk); we = 0; rd_en = 1; raddr = 4'd3;
    @(posedge clk); #1;
    chk(rdata, model[3], "read entry 3");
    @(negedge clk); rd_en = 0; raddr = 4'd5;
    @(posedge clk); #1;
    chk(rdata, model[3], "rd_en=0 holds the output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
