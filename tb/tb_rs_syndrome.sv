// tb_rs_syndrome -- self-checking testbench of the RS syndrome unit.
//
// Valid codewords (built by the reference encoder) must give S1 = S2 = 0
// and nz = 0; a codeword with random errors in 1 to 3 symbols must give the
// directly summed reference syndromes, and a single-symbol error must
// always set nz.
module tb_rs_syndrome;
  import sscmsd_pkg::*;
  import sscmsd_ref_pkg::*;

  int checks = 0, failures = 0;
  cw_t  cw;
  sym_t s1, s2;
  logic nz;

  rs_syndrome dut (.cw(cw), .s1(s1), .s2(s2), .nz(nz));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
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
    cw_t good;
    int  nerr;
    for (int n = 0; n < 300; n++) begin
      for (int j = 0; j < 17; j++) d[j] = 8'($urandom);
      good = ref_encode(d);
      cw = good;
      #1;
      check(s1 == 0 && s2 == 0 && !nz, "valid codeword gives non-zero syndrome");
      nerr = 1 + (n % 3);
      for (int e = 0; e < nerr; e++) cw[$urandom_range(18, 0)] ^= 8'($urandom_range(255, 1));
      #1;
      check(s1 == ref_syn(cw, 1) && s2 == ref_syn(cw, 2),
            $sformatf("syndromes %h %h expected %h %h", s1, s2, ref_syn(cw, 1), ref_syn(cw, 2)));
      check(nz == (cw != good ? (ref_syn(cw, 1) != 0 || ref_syn(cw, 2) != 0) : 1'b0), "nz flag");
      if (nerr == 1) check(nz || cw == good, "single-symbol error not flagged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
