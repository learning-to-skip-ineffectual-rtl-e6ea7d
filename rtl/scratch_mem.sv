// scratch_mem: the scratch memory of one processing element.
//
// Holds one 12-bit partial sum per batch (16 entries by default), so that a
// weight fetched once from off-chip memory can be applied to every batch. It
// is a simple dual-port memory: one write port and one read port, usable in
// the same clock, as the source builds it from a dual-port memory compiler.
// Here it is written as an array; a memory macro would replace it on silicon.
//
// Timing: synchronous read, rdata is valid the clock after rd_en/raddr.
// A write is visible to reads issued in a later clock. Reading and writing
// the same address in the same clock returns the old contents.
// Depth 16 and width 12 follow the source; the port protocol is this design's.
module scratch_mem #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned WIDTH = 12
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rdata <= mem[raddr];
  end

endmodule
