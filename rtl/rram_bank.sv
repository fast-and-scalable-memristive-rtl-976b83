// Behavioural model (not synthesizable as a memristive array): one bank of
// 1T1R memristive memory with its bitline drivers, selectline drivers and
// sense amplifiers.
//
// Each row holds one W-bit array element, most significant bit in the
// leftmost column (column W-1). A column read drives the bitline of the column
// whose bit is set in the one-hot bl_en and senses every selectline: sa_out[r]
// is the bit stored in row r of that column, for all rows at once. Cells are a
// two-state device (low resistance = 1, high resistance = 0); the model keeps
// them as bits. A row can also be programmed (prog_en, one row per clock
// edge) and read as a whole word (rd_row -> rd_data), which the sorter uses
// to return the value of the row it has just found to be the minimum.
//
// Timing: column and row reads are combinational (settled within the cycle of
// the column read, as the sorter assumes one column read per clock); programming
// takes effect at the rising clock edge. The column read, the MSB-left layout
// and the two-state cells follow the paper; the program and row-read ports are
// this model's own, since the paper does not describe how data is written.
module rram_bank #(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned W    = 32,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  // programming (write) port
  input  logic            prog_en,
  input  logic [AW-1:0]   prog_row,
  input  logic [W-1:0]    prog_data,
  // column read: bitline driver enables and sense amplifier outputs
  input  logic [W-1:0]    bl_en,
  output logic [ROWS-1:0] sa_out,
  // row read
  input  logic [AW-1:0]   rd_row,
  output logic [W-1:0]    rd_data
);

  logic [W-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (prog_en) cells[prog_row] <= prog_data;
  end

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) sa_out[r] = |(cells[r] & bl_en);
  end

  assign rd_data = cells[rd_row];

endmodule
