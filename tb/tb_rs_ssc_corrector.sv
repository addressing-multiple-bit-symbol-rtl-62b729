// tb_rs_ssc_corrector -- self-checking testbench of the single-symbol
// corrector.
//
// Every single-symbol error, in each of the 19 positions, must be
// corrected back to the stored codeword with ce set and err_pos naming the
// position. A clean codeword must pass unchanged with ce = due = 0.
// Double-symbol errors must never be reported as clean; when the corrector
// reports a correction, the output must be a valid codeword (syndromes 0)
// at distance one from the input, otherwise it must raise due. The
// syndromes given to the unit come from the reference model.
module tb_rs_ssc_corrector;
  import sscmsd_pkg::*;
  import sscmsd_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_due = 0, n_mis = 0;
  cw_t  cw, cw_out;
  sym_t s1, s2;
  logic ce, due;
  logic [4:0] err_pos;

  rs_ssc_corrector dut (.cw(cw), .s1(s1), .s2(s2), .cw_out(cw_out), .ce(ce), .due(due),
                        .err_pos(err_pos));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic apply(cw_t c);
    cw = c;
    s1 = ref_syn(c, 1);
    s2 = ref_syn(c, 2);
    #1;
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dw_t d;
    cw_t good, bad;
    int  p, q, diff;
    for (int n = 0; n < 120; n++) begin
      for (int j = 0; j < 17; j++) d[j] = 8'($urandom);
      good = ref_encode(d);
      apply(good);
      check(cw_out == good && !ce && !due, "clean codeword altered or flagged");
      // single-symbol error in every position
      for (p = 0; p < 19; p++) begin
        bad = good;
        bad[p] ^= 8'($urandom_range(255, 1));
        apply(bad);
        check(cw_out == good && ce && !due && err_pos == 5'(p),
              $sformatf("single error at %0d: ce=%0d due=%0d pos=%0d", p, ce, due, err_pos));
      end
      // double-symbol error
      p = $urandom_range(18, 0);
      q = (p + 1 + $urandom_range(17, 0)) % 19;
      bad = good;
      bad[p] ^= 8'($urandom_range(255, 1));
      bad[q] ^= 8'($urandom_range(255, 1));
      apply(bad);
      diff = 0;
      for (int i = 0; i < 19; i++) diff += (cw_out[i] != bad[i]) ? 1 : 0;
      check(ce || due, "double error reported as clean");
      if (ce) begin
        n_mis++;
        check(ref_syn(cw_out, 1) == 0 && ref_syn(cw_out, 2) == 0 && diff == 1,
              "mis-correction does not land on a codeword one symbol away");
      end else begin
        n_due++;
        check(cw_out == bad, "DUE codeword altered");
      end
    end
    $display("double errors: %0d DUE, %0d mis-corrected", n_due, n_mis);
    check(n_due > 0, "no DUE seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
