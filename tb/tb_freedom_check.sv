// tb_freedom_check: self-checking test of the F' evaluation.
//
// Directed cases from the paper's worked example (queues of 8: a full
// restricted queue, the 2+1+3 and 2 situation) and the exact boundary
// (sum equal to the capacity passes, one more fails), then random
// occupancies compared with the formula evaluated in the testbench:
//   S->E: 1 + occ_nse + occ_cn + occ_sn + occ_wn + pend_se <= 8
//   S->W: 1 + occ_nsw + occ_cn + occ_sn + occ_en + pend_sw <= 8
//   neither turn possible: true.
module tb_freedom_check;
  localparam int D = 8;
  logic chk_se, chk_sw;
  logic [3:0] occ_nse, occ_nsw, occ_cn, occ_sn, occ_wn, occ_en;
  logic [2:0] pend_se, pend_sw;
  logic f_ok;
  int checks = 0, failures = 0;

  freedom_check #(.DEPTH(D)) dut (.*);

  task automatic set(input bit se, sw, input int nse, nsw, cn, sn, wn, en, pse, psw);
    chk_se = se; chk_sw = sw;
    occ_nse = 4'(nse); occ_nsw = 4'(nsw); occ_cn = 4'(cn); occ_sn = 4'(sn);
    occ_wn = 4'(wn); occ_en = 4'(en); pend_se = 3'(pse); pend_sw = 3'(psw);
    #1;
  endtask

  task automatic expect_f(input bit exp, input string what);
    checks++;
    if (f_ok !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b", what, f_ok, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    // Paper's example: 2 in the restricted queue, 2+1+3 feeding it: 8 + 1 > 8.
    set(1, 0, 2, 0, 1, 2, 3, 0, 0, 0); expect_f(0, "paper example");
    set(1, 0, 2, 0, 1, 2, 2, 0, 0, 0); expect_f(1, "one fewer packet fits exactly");
    set(1, 0, 7, 0, 0, 0, 0, 5, 0, 0); expect_f(1, "E->N not counted for S->E");
    set(0, 1, 0, 7, 0, 0, 5, 0, 0, 0); expect_f(1, "W->N not counted for S->W");
    set(0, 1, 0, 7, 0, 0, 0, 1, 0, 0); expect_f(0, "S->W overflow");
    set(1, 0, 6, 0, 0, 0, 0, 0, 1, 0); expect_f(1, "pending at boundary");
    set(1, 0, 6, 0, 0, 0, 0, 0, 2, 0); expect_f(0, "pending overflow");
    set(0, 0, 8, 8, 8, 8, 8, 8, 3, 3); expect_f(1, "no restricted turn");
    set(1, 0, 8, 0, 0, 0, 0, 0, 0, 0); expect_f(0, "restricted queue full");
    for (int k = 0; k < 20000; k++) begin
      int nse, nsw, cn, sn, wn, en, pse, psw, sel;
      bit exp;
      nse = $urandom_range(D); nsw = $urandom_range(D);
      cn = $urandom_range(D); sn = $urandom_range(D);
      wn = $urandom_range(D); en = $urandom_range(D);
      // Keep sums near the boundary often enough.
      if (k % 2 == 0) begin cn = $urandom_range(2); sn = $urandom_range(2); wn = $urandom_range(2); en = $urandom_range(2); end
      pse = $urandom_range(3); psw = $urandom_range(3);
      sel = $urandom_range(2);
      set(sel == 1, sel == 2, nse, nsw, cn, sn, wn, en, pse, psw);
      if (sel == 1)      exp = (1 + nse + cn + sn + wn + pse) <= D;
      else if (sel == 2) exp = (1 + nsw + cn + sn + en + psw) <= D;
      else               exp = 1;
      expect_f(exp, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
