// State controller: the k-entry table of recorded RE states and their column
// states.
//
// State recording (sen) pushes the current wordline state and the one-hot
// column state onto the table; when all K entries are in use the oldest entry
// is dropped, so the table always holds the K most recent records. State
// loading (len) takes the most recent entry out of the table (it is used once
// and popped, as in the paper's k = 2 example). When a record and a load fall
// in the same cycle, the record just made is the one loaded and the table is
// left as it was. 'clear' empties the table at the start of a sort.
//
// Outputs: the entry to load (top_re, top_col, with the same-cycle bypass) and
// nonempty, a registered flag that the table holds an entry.
//
// The recorded RE state is the wordline state at the moment of the row
// exclusion (the rows still active when that column was read), which is what
// reloading needs to restart the search at the recorded column; the table is a
// shift register with the newest entry at index 0 (this design's choice).
module state_controller #(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned W    = 32,
  parameter int unsigned K    = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            sen,
  input  logic            len,
  input  logic [ROWS-1:0] re_in,
  input  logic [W-1:0]    col_in,
  output logic [ROWS-1:0] top_re,
  output logic [W-1:0]    top_col,
  output logic            nonempty
);

  localparam int unsigned CW = $clog2(K + 1);

  logic [ROWS-1:0] re_tab  [K];
  logic [W-1:0]    col_tab [K];
  logic [CW-1:0]   count;

  assign top_re   = sen ? re_in  : re_tab[0];
  assign top_col  = sen ? col_in : col_tab[0];
  assign nonempty = (count != '0);

  // A load needs a record: one in the table or one made in the same cycle.
  a_load_nonempty: assert property (@(posedge clk) disable iff (!rst_n || clear)
                                    len |-> (sen || count != '0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int unsigned e = 0; e < K; e++) begin
        re_tab[e]  <= '0;
        col_tab[e] <= '0;
      end
    end else if (clear) begin
      count <= '0;
    end else if (sen && !len) begin
      // push: newest at 0, oldest falls off the end when full
      re_tab[0]  <= re_in;
      col_tab[0] <= col_in;
      for (int unsigned e = 1; e < K; e++) begin
        re_tab[e]  <= re_tab[e-1];
        col_tab[e] <= col_tab[e-1];
      end
      if (count != CW'(K)) count <= count + 1'b1;
    end else if (len && !sen) begin
      // pop
      for (int unsigned e = 0; e + 1 < K; e++) begin
        re_tab[e]  <= re_tab[e+1];
        col_tab[e] <= col_tab[e+1];
      end
      if (count != '0) count <= count - 1'b1;
    end
  end

endmodule
