// wi_regs: the weight/input registers between the off-chip port and the
// global router.
//
// The off-chip port brings 24 weights and one input element per clock. The
// 192 PEs form NG=8 groups of 24; each group has a weight register that is
// loaded once per input column and then reused for every batch. Input
// elements (one batch per clock) enter a shift pipeline of NG stages; group g
// reads stage g, so group g works on batch b one clock after group g-1 did.
// This is the batch pipeline of the source (its Fig. 7 example uses two
// groups and two batches): with batch size B >= NG every PE does a useful
// multiply-accumulate every clock while only 24 new weights arrive per clock.
//
// The same wide port also delivers the previous cell state c(t-1), two words
// of 24 values per batch, which are held in `creg` for the f * c(t-1) product.
//
// Timing: every register loads at the clock edge when its load strobe is
// high; stage g of the pipeline holds what entered g clocks earlier.
// The register/pipeline arrangement follows the source; the tags carried with
// each input (batch number, first-column flag) are this design's.
module wi_regs
  import lstm_pkg::*;
#(
  parameter int unsigned NG   = N_GROUPS,
  parameter int unsigned GRPW = BW_W,
  parameter int unsigned NC   = N_PE        // c(t-1) values held
) (
  input  logic               clk,
  input  logic               rst_n,
  // wide word from the off-chip port
  input  data_t              wide_data [GRPW],
  input  logic               w_load,
  input  logic [$clog2(NG)-1:0] w_grp,
  input  logic               c_load,
  input  logic [$clog2(NC/GRPW)-1:0] c_half,
  // input element from the off-chip port
  input  logic               in_valid,
  input  logic               in_first,
  input  logic [BATCH_W-1:0] in_batch,
  input  data_t              in_data,
  // to the global router
  output data_t              weight   [NG][GRPW],
  output logic               st_valid [NG],
  output logic               st_first [NG],
  output logic [BATCH_W-1:0] st_batch [NG],
  output data_t              st_data  [NG],
  output data_t              creg     [NC]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < NG; g++) begin
        st_valid[g] <= 1'b0;
        st_first[g] <= 1'b0;
        st_batch[g] <= '0;
        st_data[g]  <= '0;
        for (int l = 0; l < GRPW; l++) weight[g][l] <= '0;
      end
      for (int l = 0; l < NC; l++) creg[l] <= '0;
    end else begin
      st_valid[0] <= in_valid;
      st_first[0] <= in_first;
      st_batch[0] <= in_batch;
      st_data[0]  <= in_data;
      for (int g = 1; g < NG; g++) begin
        st_valid[g] <= st_valid[g-1];
        st_first[g] <= st_first[g-1];
        st_batch[g] <= st_batch[g-1];
        st_data[g]  <= st_data[g-1];
      end
      if (w_load)
        for (int l = 0; l < GRPW; l++) weight[w_grp][l] <= wide_data[l];
      if (c_load)
        for (int l = 0; l < GRPW; l++) creg[c_half*GRPW + l] <= wide_data[l];
    end
  end

endmodule
