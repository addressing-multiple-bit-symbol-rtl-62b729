// tb_rs_encoder -- self-checking testbench of the RS(19,17,8) encoder.
//
// Compares the encoder with check symbols solved independently from the
// parity equations, and checks that every produced codeword has zero
// syndromes at alpha^1 and alpha^2 and carries the dataword unchanged in
// symbols 2..18. Corner datawords: all zero, all ones, single non-zero
// symbol in each position.
module tb_rs_encoder;
  import sscmsd_pkg::*;
  import sscmsd_ref_pkg::*;

  int checks = 0, failures = 0;
  dw_t dw;
  cw_t cw;

  rs_encoder dut (.dw(dw), .cw(cw));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic try_one(dw_t d);
    cw_t exp;
    dw = d;
    #1;
    exp = ref_encode(d);
    check(cw == exp, $sformatf("codeword %h expected %h", cw, exp));
    check(ref_syn(cw, 1) == 0 && ref_syn(cw, 2) == 0, "syndromes of codeword non-zero");
    check(cw[18:2] == d, "systematic part differs from dataword");
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
    try_one('0);
    try_one('1);
    for (int p = 0; p < 17; p++) begin
      d = '0;
      d[p] = 8'($urandom_range(255, 1));
      try_one(d);
    end
    for (int n = 0; n < 300; n++) begin
      for (int j = 0; j < 17; j++) d[j] = 8'($urandom);
      try_one(d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
