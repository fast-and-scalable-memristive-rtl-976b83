// Column-skipping memristive in-memory sorter (top level).
//
// Sorts N unsigned W-bit numbers held in 1T1R memristive memory by repeated
// in-memory minimum search, emitting them in ascending order. Each minimum is
// found by reading bit columns from the MSB down and excluding rows that read
// 1; the K most recent row-exclusion states of a search that started at the
// MSB are recorded with their columns and reloaded by later searches, which
// then skip the columns above the recorded one. The array is split into
// C = N/NS banks (sub-sorters), kept in lockstep by the multi-bank manager.
// NS = N gives the single-bank sorter.
//
// Interface:
//   prog_en/prog_addr/prog_data  write element prog_addr (one per cycle, idle only)
//   start                        begin sorting the N stored elements
//   out_valid/out_idx/out_val    one sorted element per valid cycle, ascending;
//                                equal values leave lowest index first
//   done                         all N elements emitted; rises with the last
//                                out_valid and holds until the next start
// Timing: the outputs are registered, one cycle after the cycle in which the
// minimum is found. A sort takes one cycle per column read plus one cycle per
// extra copy of a repeated value; state loads cost no cycle.
//
// Defaults N = 1024, W = 32, K = 2 are the paper's main configuration; the
// paper's multi-bank variants use NS = 64, 256 or 512. The programming port
// and the registered output stage are this design's own.
module cs_sorter
  import cs_pkg::*;
#(
  parameter int unsigned N  = 1024,
  parameter int unsigned W  = 32,
  parameter int unsigned K  = 2,
  parameter int unsigned NS = 1024,
  localparam int unsigned C   = N / NS,
  localparam int unsigned AW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned LAW = (NS > 1) ? $clog2(NS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          prog_en,
  input  logic [AW-1:0] prog_addr,
  input  logic [W-1:0]  prog_data,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          out_valid,
  output logic [AW-1:0] out_idx,
  output logic [W-1:0]  out_val
);

  en_local_t      en_local  [C];
  logic           at_end    [C];
  cnt_t           cnt_keep  [C];
  cnt_t           cnt_excl  [C];
  logic           done_keep [C];
  logic           done_excl [C];
  logic [LAW-1:0] pick_idx  [C];
  logic [W-1:0]   pick_val  [C];
  logic [C-1:0]   bank_done, bank_busy;
  logic [C-1:0]   sel;
  en_sync_t       en_sync;
  logic           iter_end, finish, m_valid;
  logic [AW-1:0]  m_idx;
  logic [W-1:0]   m_val;

  for (genvar b = 0; b < C; b++) begin : g_bank
    // bank and row of the element being programmed
    int unsigned    bank_of;
    logic [LAW-1:0] row_of;
    assign bank_of = int'(prog_addr) / NS;
    assign row_of  = LAW'(int'(prog_addr) % NS);
    sub_sorter #(.ROWS(NS), .W(W), .K(K)) u_sub (
      .clk      (clk),
      .rst_n    (rst_n),
      .prog_en  (prog_en && (bank_of == b)),
      .prog_row (row_of),
      .prog_data(prog_data),
      .start    (start),
      .en_local (en_local[b]),
      .at_end   (at_end[b]),
      .cnt_keep (cnt_keep[b]),
      .cnt_excl (cnt_excl[b]),
      .done_keep(done_keep[b]),
      .done_excl(done_excl[b]),
      .pick_idx (pick_idx[b]),
      .pick_val (pick_val[b]),
      .en_sync  (en_sync),
      .sel      (sel[b]),
      .iter_end (iter_end),
      .finish   (finish),
      .busy     (bank_busy[b]),
      .done     (bank_done[b])
    );
  end

  multibank_manager #(.C(C), .NS(NS), .W(W)) u_mgr (
    .en_local (en_local),
    .at_end   (at_end),
    .cnt_keep (cnt_keep),
    .cnt_excl (cnt_excl),
    .done_keep(done_keep),
    .done_excl(done_excl),
    .pick_idx (pick_idx),
    .pick_val (pick_val),
    .en_sync  (en_sync),
    .sel      (sel),
    .iter_end (iter_end),
    .finish   (finish),
    .out_valid(m_valid),
    .out_idx  (m_idx),
    .out_val  (m_val)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_val   <= '0;
    end else begin
      out_valid <= m_valid;
      out_idx   <= m_idx;
      out_val   <= m_val;
    end
  end

  // All banks run in lockstep, and at most one of them emits a row per cycle.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (bank_busy == '0) || (bank_busy == '1));
  a_one_sel:  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(sel));

  assign busy = bank_busy[0];
  assign done = bank_done[0];

endmodule
