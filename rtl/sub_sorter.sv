// Sub-sorter: one bank of 1T1R memristive memory with its own near-memory
// circuit (column processor, row processor, state controller and top-level
// controller), as in the paper's near-memory circuit figure.
//
// The sub-sorter reports its local operation bits (en_i) and its candidate
// status to the multi-bank manager and carries out whatever the synchronised
// bits (en_sync, sel, iter_end, finish) say. On its own (one bank, manager of
// one bank) it is the paper's single-bank column-skipping sorter.
//
// Interface: prog_* programs one row per cycle before 'start'. During a sort
// the bank presents pick_idx / pick_val, the lowest-numbered candidate row and
// its stored value; the manager emits it when it selects this bank.
// Timing: one column read per cycle; state load and iteration change happen at
// the clock edge that ends an iteration, so they cost no cycle.
module sub_sorter
  import cs_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned W    = 32,
  parameter int unsigned K    = 2,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          prog_en,
  input  logic [AW-1:0] prog_row,
  input  logic [W-1:0]  prog_data,
  input  logic          start,
  // to the multi-bank manager
  output en_local_t     en_local,
  output logic          at_end,
  output cnt_t          cnt_keep,
  output cnt_t          cnt_excl,
  output logic          done_keep,
  output logic          done_excl,
  output logic [AW-1:0] pick_idx,
  output logic [W-1:0]  pick_val,
  // from the multi-bank manager
  input  en_sync_t      en_sync,
  input  logic          sel,
  input  logic          iter_end,
  input  logic          finish,
  output logic          busy,
  output logic          done
);

  logic [W-1:0]    col, top_col;
  logic [ROWS-1:0] sa, wl, top_re;
  logic            last, cr, active, cen_req, sen_req, to_msb, nonempty;
  logic            has_one, has_zero;

  rram_bank #(.ROWS(ROWS), .W(W)) u_bank (
    .clk      (clk),
    .prog_en  (prog_en),
    .prog_row (prog_row),
    .prog_data(prog_data),
    .bl_en    (cr ? col : '0),
    .sa_out   (sa),
    .rd_row   (pick_idx),
    .rd_data  (pick_val)
  );

  sort_controller u_ctrl (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (start),
    .last    (last),
    .len_sync(en_sync.len),
    .iter_end(iter_end),
    .finish  (finish),
    .cr      (cr),
    .active  (active),
    .at_end  (at_end),
    .cen_req (cen_req),
    .sen_req (sen_req),
    .to_msb  (to_msb),
    .busy    (busy),
    .done    (done)
  );

  column_processor #(.W(W)) u_colp (
    .clk   (clk),
    .rst_n (rst_n),
    .to_msb(start || to_msb),
    .cen   (en_sync.cen),
    .len   (en_sync.len),
    .ld_col(top_col),
    .col   (col),
    .last  (last)
  );

  row_processor #(.ROWS(ROWS)) u_rowp (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .cr       (cr),
    .active   (active),
    .sa       (sa),
    .ren      (en_sync.ren),
    .sel      (sel),
    .iter_end (iter_end),
    .len      (en_sync.len),
    .ld_re    (top_re),
    .wl       (wl),
    .has_one  (has_one),
    .has_zero (has_zero),
    .cnt_keep (cnt_keep),
    .cnt_excl (cnt_excl),
    .done_keep(done_keep),
    .done_excl(done_excl),
    .pick_idx (pick_idx)
  );

  state_controller #(.ROWS(ROWS), .W(W), .K(K)) u_state (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (start),
    .sen     (en_sync.sen),
    .len     (en_sync.len),
    .re_in   (wl),
    .col_in  (col),
    .top_re  (top_re),
    .top_col (top_col),
    .nonempty(nonempty)
  );

  assign en_local = '{cen: cen_req, has_one: has_one, has_zero: has_zero,
                      sen: sen_req, len: nonempty};

endmodule
