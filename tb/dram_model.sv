// dram_model: behavioural stand-in for the off-chip memory, for simulation.
//
// Not synthesizable design content: the accelerator's off-chip LPDDR4 memory
// is a bought part. This model offers the three channels the accelerator
// uses (wide 24 x 8-bit words, 8-bit values, 16-bit offsets), each with one
// read and one write port and one clock of read latency, and no refresh,
// bank or burst effects. Testbenches load and inspect the arrays directly.
module dram_model
  import lstm_pkg::*;
#(
  parameter int unsigned WWORDS = 4096,
  parameter int unsigned VWORDS = 4096,
  parameter int unsigned IWORDS = 1024
) (
  input  logic               clk,
  input  logic               wmem_rd_en,
  input  logic [ADDR_W-1:0]  wmem_rd_addr,
  output data_t              wmem_rd_data [BW_W],
  input  logic               wmem_wr_en,
  input  logic [ADDR_W-1:0]  wmem_wr_addr,
  input  data_t              wmem_wr_data [BW_W],
  input  logic               vmem_rd_en,
  input  logic [ADDR_W-1:0]  vmem_rd_addr,
  output data_t              vmem_rd_data,
  input  logic               vmem_wr_en,
  input  logic [ADDR_W-1:0]  vmem_wr_addr,
  input  data_t              vmem_wr_data,
  input  logic               imem_rd_en,
  input  logic [ADDR_W-1:0]  imem_rd_addr,
  output logic [CNT_W-1:0]   imem_rd_data,
  input  logic               imem_wr_en,
  input  logic [ADDR_W-1:0]  imem_wr_addr,
  input  logic [CNT_W-1:0]   imem_wr_data
);

  data_t            wmem [WWORDS][BW_W];
  data_t            vmem [VWORDS];
  logic [CNT_W-1:0] imem [IWORDS];
  int               rd_errors = 0;   // out-of-range accesses

  always_ff @(posedge clk) begin
    if (wmem_rd_en) begin
      if (wmem_rd_addr < WWORDS) wmem_rd_data <= wmem[wmem_rd_addr];
      else begin
        rd_errors <= rd_errors + 1;
        $display("dram_model: wmem rd address %0d out of range", wmem_rd_addr);
      end
    end
    if (wmem_wr_en) begin
      if (wmem_wr_addr < WWORDS) wmem[wmem_wr_addr] <= wmem_wr_data;
      else begin
        rd_errors <= rd_errors + 1;
        $display("dram_model: wmem wr address %0d out of range", wmem_wr_addr);
      end
    end
    if (vmem_rd_en) begin
      if (vmem_rd_addr < VWORDS) vmem_rd_data <= vmem[vmem_rd_addr];
      else begin
        rd_errors <= rd_errors + 1;
        $display("dram_model: vmem rd address %0d out of range", vmem_rd_addr);
      end
    end
    if (vmem_wr_en) begin
      if (vmem_wr_addr < VWORDS) vmem[vmem_wr_addr] <= vmem_wr_data;
      else begin
        rd_errors <= rd_errors + 1;
        $display("dram_model: vmem wr address %0d out of range", vmem_wr_addr);
      end
    end
    if (imem_rd_en) begin
      if (imem_rd_addr < IWORDS) imem_rd_data <= imem[imem_rd_addr];
      else begin
        rd_errors <= rd_errors + 1;
        $display("dram_model: imem rd address %0d out of range", imem_rd_addr);
      end
    end
    if (imem_wr_en) begin
      if (imem_wr_addr < IWORDS) imem[imem_wr_addr] <= imem_wr_data;
      else begin
        rd_errors <= rd_errors + 1;
        $display("dram_model: imem wr address %0d out of range", imem_wr_addr);
      end
    end
  end

endmodule
