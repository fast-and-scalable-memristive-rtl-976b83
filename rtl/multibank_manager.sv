// Multi-bank manager: runs C sub-sorters, each holding NS = N/C rows, as one
// length-N sorter.
//
// Synchronisation (after the paper's multi-bank figure): cen_sync and len_sync
// are ORs of the local bits (len additionally only at an iteration boundary).
// ren_sync and sen_sync come from a global all-0's-or-1's judgement: the
// column read excludes rows only if some active row in any bank read a 1 and
// some active row in any bank read a 0; recording also needs an iteration
// that started at the MSB.
//
// Sub-sorter state control: while minimum rows are being emitted, each bank's
// candidate count (chosen by ren_sync between its "keep" and "exclude"
// counts) is added up with saturation. The lowest-numbered bank with a
// candidate is selected (sel) and its lowest candidate row leaves through the
// output multiplexer, as global index bank*NS + local index. The iteration
// ends (iter_end) when that row was the last candidate in all banks; 'finish'
// additionally says that every row of every bank is now sorted.
//
// The all-0's-or-1's control works on the two flags per bank instead of on a
// single ren_i bit, and the bank priority for repeated values is lowest-first;
// both are this design's choices (the paper does not give the insides of
// these two controls). Purely combinational.
module multibank_manager
  import cs_pkg::*;
#(
  parameter int unsigned C   = 16,
  parameter int unsigned NS  = 64,
  parameter int unsigned W   = 32,
  localparam int unsigned LAW = (NS > 1) ? $clog2(NS) : 1,
  localparam int unsigned GAW = (C * NS > 1) ? $clog2(C * NS) : 1
) (
  input  en_local_t        en_local  [C],
  input  logic             at_end    [C],
  input  cnt_t             cnt_keep  [C],
  input  cnt_t             cnt_excl  [C],
  input  logic             done_keep [C],
  input  logic             done_excl [C],
  input  logic [LAW-1:0]   pick_idx  [C],
  input  logic [W-1:0]     pick_val  [C],
  output en_sync_t         en_sync,
  output logic [C-1:0]     sel,
  output logic             iter_end,
  output logic             finish,
  output logic             out_valid,
  output logic [GAW-1:0]   out_idx,
  output logic [W-1:0]     out_val
);

  logic any_one, any_zero, any_cen, any_sen, any_len, any_end, all_done;
  logic ren_s, sen_s, cen_s, len_s;
  cnt_t total;
  cnt_t cnt [C];

  always_comb begin
    any_one  = 1'b0;
    any_zero = 1'b0;
    any_cen  = 1'b0;
    any_sen  = 1'b0;
    any_len  = 1'b0;
    any_end  = 1'b0;
    for (int unsigned b = 0; b < C; b++) begin
      any_one  |= en_local[b].has_one;
      any_zero |= en_local[b].has_zero;
      any_cen  |= en_local[b].cen;
      any_sen  |= en_local[b].sen;
      any_len  |= en_local[b].len;
      any_end  |= at_end[b];
    end
  end

  // All 0's or 1's control, and the OR gates.
  assign ren_s   = any_one && any_zero;
  assign sen_s   = ren_s && any_sen;
  assign cen_s   = any_cen;
  assign len_s   = iter_end && !finish && (any_len || sen_s);
  assign en_sync = '{cen: cen_s, ren: ren_s, sen: sen_s, len: len_s};

  // Sub-sorter state control and output selection.
  always_comb begin
    total    = CNT_NONE;
    all_done = 1'b1;
    sel      = '0;
    out_idx  = '0;
    out_val  = '0;
    for (int unsigned b = 0; b < C; b++) begin
      cnt[b]   = ren_s ? cnt_excl[b] : cnt_keep[b];
      total    = cnt_sat_add(total, cnt[b]);
      all_done &= ren_s ? done_excl[b] : done_keep[b];
    end
    for (int b = C - 1; b >= 0; b--) begin
      if (any_end && cnt[b] != CNT_NONE) begin
        sel     = '0;
        sel[b]  = 1'b1;
        out_idx = GAW'(b * NS) + GAW'(pick_idx[b]);
        out_val = pick_val[b];
      end
    end
  end

  assign out_valid = any_end && (total != CNT_NONE);
  assign iter_end  = any_end && (total != CNT_MANY);
  assign finish    = iter_end && all_done;

endmodule
