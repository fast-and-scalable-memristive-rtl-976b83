// Shared types of the column-skipping in-memory sorter.
//
// cnt_t is a saturating population count (none / exactly one / two or more)
// that a bank reports for its set of candidate rows; the multi-bank manager
// adds these up across banks to decide whether an iteration has found a single
// minimum or must stall to emit repeated minima one by one.
//
// en_local_t is the bundle of local operation bits en_i one sub-sorter sends to
// the multi-bank manager, en_sync_t the synchronised bundle en_sync it gets
// back (cen, ren, sen, len as named in the paper's multi-bank figure). The
// local row-exclusion information is carried as two flags (an active row
// holds a 1 / an active row holds a 0) so the all-0's-or-1's judgement can be
// made over all banks together; that split is this design's own choice.
package cs_pkg;

  typedef enum logic [1:0] {
    CNT_NONE = 2'd0,
    CNT_ONE  = 2'd1,
    CNT_MANY = 2'd2
  } cnt_t;

  // Local operation bits of sub-sorter i (en_i).
  typedef struct packed {
    logic cen;       // column update wanted: a column read that is not on column 0
    logic has_one;   // column read: some active row reads 1
    logic has_zero;  // column read: some active row reads 0
    logic sen;       // state recording allowed: iteration started at the MSB
    logic len;       // state table holds at least one record
  } en_local_t;

  // Synchronised operation bits (en_sync).
  typedef struct packed {
    logic cen;       // advance the column state to the next lower column
    logic ren;       // row exclusion: clear wordlines of active rows that read 1
    logic sen;       // state recording: push (RE state, column state)
    logic len;       // state loading: load top record into wordlines / column
  } en_sync_t;

  // Controller phase, identical in every bank.
  typedef enum logic [1:0] {
    PH_IDLE  = 2'd0,
    PH_RUN   = 2'd1,   // one column read per cycle
    PH_STALL = 2'd2,   // column processor stalled, repeated minima leave one per cycle
    PH_DONE  = 2'd3
  } phase_t;

  // Saturating count of the set bits of a vector, as cnt_t.
  function automatic cnt_t cnt_sat_add(cnt_t a, cnt_t b);
    logic [2:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s >= 3'd2) ? CNT_MANY : cnt_t'(s[1:0]);
  endfunction

endpackage
