// encoder: run-length encoder of the pruned hidden state.
//
// After h_t of a block of hidden units is known, the columns (hidden-unit
// indices) are presented one per clock with a flag telling whether any batch
// holds a non-zero value there. As in the source, a counter counts up while
// the column is zero in all batches; when a column with a non-zero value
// arrives, the current count is emitted as that column's offset (the number
// of all-zero columns skipped since the previous kept column) and the counter
// restarts. The offsets are stored next to the kept h values, and in the next
// time step the controller reads them to fetch only the weight rows of kept
// columns, so no decoder is needed.
//
// In dense mode (sparse_en=0) every column is kept with offset 0.
// The counter runs on across blocks of 48 units and is cleared by `clear` at
// the start of a time step. `kept` counts the kept columns (the length of the
// encoded vector), `skipped` the dropped ones.
//
// Timing: emit/offset/index are combinational in the clock col_valid is high
// (index = position of this kept column in the encoded vector); counters
// update at the clock edge.
module encoder
  import lstm_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             sparse_en,
  input  logic             col_valid,
  input  logic             col_nonzero,
  output logic             emit,
  output logic [CNT_W-1:0] offset,
  output logic [CNT_W-1:0] index,
  output logic [CNT_W-1:0] kept,
  output logic [CNT_W-1:0] skipped
);

  logic [CNT_W-1:0] zero_run;

  assign emit   = col_valid && (col_nonzero || !sparse_en);
  assign offset = zero_run;
  assign index  = kept;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zero_run <= '0;
      kept     <= '0;
      skipped  <= '0;
    end else if (clear) begin
      zero_run <= '0;
      kept     <= '0;
      skipped  <= '0;
    end else if (col_valid) begin
      if (emit) begin
        zero_run <= '0;
        kept     <= kept + 1'b1;
      end else begin
        zero_run <= zero_run + 1'b1;
        skipped  <= skipped + 1'b1;
      end
    end
  end

endmodule
