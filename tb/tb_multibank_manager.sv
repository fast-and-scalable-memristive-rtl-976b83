// Testbench of the multi-bank manager with four banks of 8 rows, driven with
// random local operation bits and bank status. The testbench predicts each
// synchronised bit (cen = OR, ren = a 1 and a 0 anywhere, sen = ren and some
// bank recording, len only at an iteration end that is not the finish), the
// saturated total of candidates, the selected bank (lowest with a candidate),
// iteration end, finish, and the output index (bank * 8 + local index) and
// value.
module tb_multibank_manager;
  import cs_pkg::*;
  localparam int C = 4, NS = 8, W = 8;
  en_local_t   en_local  [C];
  logic        at_end    [C];
  cnt_t        cnt_keep  [C];
  cnt_t        cnt_excl  [C];
  logic        done_keep [C];
  logic        done_excl [C];
  logic [2:0]  pick_idx  [C];
  logic [W-1:0] pick_val [C];
  en_sync_t    en_sync;
  logic [C-1:0] sel;
  logic        iter_end, finish, out_valid;
  logic [4:0]  out_idx;
  logic [W-1:0] out_val;
  int checks = 0, failures = 0;

  multibank_manager #(.C(C), .NS(NS), .W(W)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      bit one, zero, cen, sen, len, endp, all_done, e_ren, e_sen, e_iter, e_fin;
      int total, first;
      bit end_all;
      end_all = ($urandom_range(0, 1) != 0);
      for (int b = 0; b < C; b++) begin
        en_local[b]  = 5'($urandom());
        at_end[b]    = end_all;
        cnt_keep[b]  = cnt_t'($urandom_range(0, 2));
        cnt_excl[b]  = cnt_t'($urandom_range(0, 2));
        done_keep[b] = ($urandom_range(0, 3) != 0);
        done_excl[b] = ($urandom_range(0, 3) != 0);
        pick_idx[b]  = 3'($urandom());
        pick_val[b]  = W'($urandom());
      end
      #1;
      one = 0; zero = 0; cen = 0; sen = 0; len = 0; all_done = 1; total = 0; first = -1;
      for (int b = 0; b < C; b++) begin
        one  |= en_local[b].has_one;
        zero |= en_local[b].has_zero;
        cen  |= en_local[b].cen;
        sen  |= en_local[b].sen;
        len  |= en_local[b].len;
      end
      e_ren = one && zero;
      e_sen = e_ren && sen;
      for (int b = 0; b < C; b++) begin
        int n;
        n = int'(e_ren ? cnt_excl[b] : cnt_keep[b]);
        total += n;
        if (n != 0 && first < 0) first = b;
        all_done &= e_ren ? done_excl[b] : done_keep[b];
      end
      endp   = end_all;
      e_iter = endp && total <= 1;
      e_fin  = e_iter && all_done;
      chk(en_sync.ren == e_ren && en_sync.sen == e_sen && en_sync.cen == cen, "ren/sen/cen");
      chk(en_sync.len == (e_iter && !e_fin && (len || e_sen)), "len");
      chk(iter_end == e_iter && finish == e_fin, "iter_end/finish");
      chk(out_valid == (endp && total > 0), "out_valid");
      if (endp && first >= 0) begin
        chk(sel == C'(1 << first), $sformatf("sel %b want bank %0d", sel, first));
        chk(int'(out_idx) == first * NS + int'(pick_idx[first]) && out_val == pick_val[first],
            "output index/value");
      end else chk(sel == '0, "no selection");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
