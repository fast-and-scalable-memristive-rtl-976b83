// Row processor: the wordline (row-exclusion, RE) state of one bank and the
// row controller that judges a column read.
//
// wl[r] = 1 means row r is still a candidate for the current minimum. During a
// column read the sense-amplifier bits sa[r] of the active rows are examined:
// has_one / has_zero say whether any active row read a 1 / a 0 (the row
// controller's "all 0's or 1's" test; in a multi-bank sorter the decision is
// made over all banks). When the synchronised ren is given, each active row
// that read a 1 is excluded: wl[r] <= wl[r] & ~sa[r], the per-row gate of the
// paper's near-memory figure. So the candidates left after this cycle are
// cand = ren ? wl & ~sa : wl.
//
// At the end of an iteration the candidates are the rows holding the minimum.
// When 'sel' is given the lowest-numbered candidate (pick_idx) is emitted and
// marked sorted; the other candidates stay (repeated values, emitted in
// following cycles while the column processor stalls). On iter_end the
// wordlines are set up for the next iteration: with len they take the recorded
// RE state ld_re, otherwise all rows; in both cases the sorted rows are
// removed. 'start' clears all sorted flags and activates every row.
//
// The sorted flags, the lowest-index choice among repeated values and the
// masking of reloaded states with the sorted flags are this design's own
// choices: the paper only says the minimum row "is excluded and marked as
// sorted".
//
// To keep the bank-to-manager paths free of loops, the counts and the
// "everything else sorted" flags are reported for both outcomes of ren (keep /
// excl); the manager chooses with its own ren.
module row_processor
  import cs_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            cr,        // a column read is in progress
  input  logic            active,    // sorting in progress (RUN or STALL)
  input  logic [ROWS-1:0] sa,        // sense amplifier outputs
  input  logic            ren,       // synchronised row exclusion
  input  logic            sel,       // emit the lowest candidate of this bank
  input  logic            iter_end,  // last minimum of this iteration emitted
  input  logic            len,       // next iteration reloads ld_re
  input  logic [ROWS-1:0] ld_re,
  output logic [ROWS-1:0] wl,        // wordline / RE state
  output logic            has_one,
  output logic            has_zero,
  output cnt_t            cnt_keep,  // candidates if no exclusion
  output cnt_t            cnt_excl,  // candidates if exclusion
  output logic            done_keep, // all rows sorted or candidates (no exclusion)
  output logic            done_excl, // same, with exclusion
  output logic [AW-1:0]   pick_idx   // lowest candidate
);

  logic [ROWS-1:0] sorted;
  logic [ROWS-1:0] ones, keep_excl, cand, pick, sorted_n, cand_n;

  function automatic cnt_t count_of(logic [ROWS-1:0] v);
    if (v == '0)                return CNT_NONE;
    else if ((v & (v - 1)) == '0) return CNT_ONE;
    else                          return CNT_MANY;
  endfunction

  // Row controller.
  assign ones      = wl & sa;
  assign keep_excl = wl & ~sa;
  assign has_one   = cr && (ones != '0);
  assign has_zero  = cr && (keep_excl != '0);
  assign cnt_keep  = count_of(wl);
  assign cnt_excl  = count_of(keep_excl);
  assign done_keep = &(sorted | wl);
  assign done_excl = &(sorted | keep_excl);

  assign cand = ren ? keep_excl : wl;
  assign pick = cand & (~cand + 1'b1);   // lowest set bit

  always_comb begin
    pick_idx = '0;
    for (int unsigned r = 0; r < ROWS; r++)
      if (pick[r]) pick_idx = AW'(r);
  end

  assign sorted_n = sel ? (sorted | pick) : sorted;
  assign cand_n   = sel ? (cand & ~pick) : cand;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wl     <= '0;
      sorted <= '0;
    end else if (start) begin
      wl     <= '1;
      sorted <= '0;
    end else if (active) begin
      sorted <= sorted_n;
      if (iter_end) wl <= (len ? ld_re : '1) & ~sorted_n;
      else          wl <= cand_n;
    end
  end

endmodule
