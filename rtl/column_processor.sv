// Column processor: holds the column state, which selects the bit column that
// the next column read (CR) drives.
//
// The column state is a one-hot register, one flip-flop per bit column, whose
// set bit enables that column's bitline driver. Each flip-flop has an enable
// (cen) and a load multiplexer (len), as drawn in the paper's near-memory
// circuit figure: with cen the set bit moves one column to the right, towards
// the LSB (the column controller's next-step state); with len the column state
// recorded in the state controller is loaded instead. to_msb starts an
// iteration from the MSB column (the "record empty" branch of the flow chart).
// Priority: to_msb, then len, then cen. 'last' flags that column 0 is selected.
// The one-hot encoding and the priority are this design's choices.
module column_processor #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         to_msb,   // select column W-1 at the next edge
  input  logic         cen,      // step to the next lower column
  input  logic         len,      // load ld_col (recorded column state)
  input  logic [W-1:0] ld_col,
  output logic [W-1:0] col,      // one-hot column state = bitline driver enables
  output logic         last      // column 0 is being read
);

  logic [W-1:0] col_next;

  // Column controller: next-step column state.
  always_comb begin
    col_next = col;
    if (to_msb)   col_next = {1'b1, {(W-1){1'b0}}};
    else if (len) col_next = ld_col;
    else if (cen) col_next = col >> 1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) col <= {1'b1, {(W-1){1'b0}}};
    else        col <= col_next;
  end

  assign last = col[0];

  // Exactly one bitline driver is enabled at any time.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(col));

endmodule
