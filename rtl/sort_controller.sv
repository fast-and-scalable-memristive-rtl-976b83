// Top-level controller of one sub-sorter: schedules column read (CR), row
// exclusion (RE), state recording (SR) and state loading (SL) as in the
// paper's flow chart of the iterative min search.
//
// Phases (cs_pkg::phase_t): after 'start' the controller is in RUN, where one
// column is read per clock cycle. An iteration starts either at the MSB column
// with every unsorted row active (state table empty; from_msb = 1, recording
// allowed) or at a recorded column with a recorded RE state (state loaded;
// from_msb = 0, no recording). On the cycle that reads column 0 the minimum is
// known. If exactly one row is left over all banks, it is emitted in that same
// cycle and the next iteration starts on the following cycle (iter_end from the
// manager). If several rows hold the minimum value, the controller enters
// STALL: the column processor holds still and one of those rows is emitted per
// cycle until the last, which ends the iteration. When the last row of the
// whole array has been emitted ('finish') the controller goes to DONE.
//
// The controller only proposes its local operation bits (en_i: cen, sen and,
// via the other blocks, ren and len); every state change uses the
// synchronised bits, so all banks of a multi-bank sorter stay in lockstep.
// The phase encoding and the zero-cycle state load (the load happens at the
// clock edge that ends the previous iteration) are this design's choices.
module sort_controller
  import cs_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  logic     last,      // column 0 selected
  input  logic     len_sync,  // synchronised state load
  input  logic     iter_end,  // from the manager: iteration ends this cycle
  input  logic     finish,    // from the manager: whole array emitted
  output logic     cr,        // column read this cycle
  output logic     active,    // RUN or STALL
  output logic     at_end,    // minimum rows are being emitted this cycle
  output logic     cen_req,   // local cen_i
  output logic     sen_req,   // local sen_i
  output logic     to_msb,    // next iteration starts at the MSB
  output logic     busy,
  output logic     done
);

  phase_t phase;
  logic   from_msb;

  assign cr      = (phase == PH_RUN);
  assign active  = (phase == PH_RUN) || (phase == PH_STALL);
  assign at_end  = (cr && last) || (phase == PH_STALL);
  assign cen_req = cr && !last;
  assign sen_req = cr && from_msb;
  assign to_msb  = iter_end && !finish && !len_sync;
  assign done    = (phase == PH_DONE);
  assign busy    = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= PH_IDLE;
      from_msb <= 1'b1;
    end else if (start) begin
      phase    <= PH_RUN;
      from_msb <= 1'b1;
    end else if (at_end) begin
      if (iter_end) begin
        phase    <= finish ? PH_DONE : PH_RUN;
        from_msb <= !len_sync;
      end else begin
        phase    <= PH_STALL;
      end
    end
  end

endmodule
