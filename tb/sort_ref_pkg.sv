// Reference model for the sorter testbenches, written as plain behavioural
// code over integer arrays (no bit-column hardware structure).
//
// ref_run() replays the column-skipping min search on a list of unsigned
// values and returns the number of clock cycles the hardware is expected to
// take (one per column read, plus one per additional copy of a repeated
// minimum) together with the order in which the rows leave (ascending value,
// lowest index first among equal values) and how often records, loads,
// exclusions and stalls happen. It uses queues of row indices instead of
// bit masks, so it shares no structure with the RTL.
package sort_ref_pkg;

  typedef struct {
    int cycles;
    int records;
    int loads;
    int exclusions;
    int stall_cycles;
    int drops;      // records pushed into a full table
  } ref_stats_t;

  typedef struct {
    int rows[$];
    int col;
  } rec_t;

  function automatic ref_stats_t ref_run(input longint unsigned vals[], input int w, input int k,
                                         ref int order[$]);
    ref_stats_t st;
    bit    done_row[];
    rec_t  stack[$];   // stack[0] = most recent
    int    remaining;
    int    n;
    n = vals.size();
    done_row = new[n];
    st = '{default: 0};
    order.delete();
    remaining = n;
    while (remaining > 0) begin
      int  act[$];
      int  c;
      bit  from_msb;
      if (stack.size() == 0) begin
        for (int r = 0; r < n; r++) if (!done_row[r]) act.push_back(r);
        c = w - 1;
        from_msb = 1;
      end else begin
        rec_t top;
        top = stack.pop_front();
        foreach (top.rows[i]) if (!done_row[top.rows[i]]) act.push_back(top.rows[i]);
        c = top.col;
        from_msb = 0;
        st.loads++;
      end
      for (; c >= 0; c--) begin
        int z[$];
        st.cycles++;
        foreach (act[i]) if (((vals[act[i]] >> c) & 1) == 0) z.push_back(act[i]);
        if (z.size() != 0 && z.size() != act.size()) begin
          st.exclusions++;
          if (from_msb) begin
            rec_t rr;
            rr.rows = act;
            rr.col  = c;
            // A record made on column 0 that leaves a single minimum is
            // loaded again at once; it never takes a table entry.
            if (stack.size() == k && !(c == 0 && z.size() == 1)) begin
              void'(stack.pop_back());
              st.drops++;
            end
            stack.push_front(rr);
            st.records++;
          end
          act = z;
        end
      end
      act.sort();
      foreach (act[i]) begin
        order.push_back(act[i]);
        done_row[act[i]] = 1;
        remaining--;
      end
      st.cycles       += act.size() - 1;
      st.stall_cycles += act.size() - 1;
    end
    return st;
  endfunction

endpackage
