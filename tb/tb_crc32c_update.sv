// tb_crc32c_update -- self-checking testbench of the CRC-32C hash unit.
//
// Checks a 9-byte instance against the standard check value
// CRC-32C("123456789") = 0xE3069283 and the default 72-byte instance (line
// plus address, the hash of the design) against an independent MSB-first
// reference on random messages and on messages differing in one bit.
// Instances built with the two Koopman polynomials and IEEE 802.3 are
// checked the same way (IEEE also against CRC-32("123456789") =
// 0xCBF43926).
module tb_crc32c_update;
  import sscmsd_pkg::*;
  import sscmsd_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [8*72-1:0] msg72;
  logic [8*9-1:0]  msg9;
  hash_t           out72, out9;

  crc32c_update                 dut72 (.crc_in(CRC_INIT), .data(msg72), .crc_out(out72));
  crc32c_update #(.NBYTES(9))   dut9  (.crc_in(CRC_INIT), .data(msg9),  .crc_out(out9));

  // The other CRC-32 polynomials the hash unit can be built with.
  hash_t out9_ieee, out72_alt[3];
  crc32c_update #(.NBYTES(9), .POLY_REFL(CRC32_IEEE_REFL))
                                dut9i (.crc_in(CRC_INIT), .data(msg9), .crc_out(out9_ieee));
  crc32c_update #(.POLY_REFL(CRC32K_REFL))     dutk  (.crc_in(CRC_INIT), .data(msg72), .crc_out(out72_alt[0]));
  crc32c_update #(.POLY_REFL(CRC32K2_REFL))    dutk2 (.crc_in(CRC_INIT), .data(msg72), .crc_out(out72_alt[1]));
  crc32c_update #(.POLY_REFL(CRC32_IEEE_REFL)) duti  (.crc_in(CRC_INIT), .data(msg72), .crc_out(out72_alt[2]));
  localparam logic [31:0] ALT_POLY [3] = '{32'h741B8CD7, 32'h32583499, 32'h04C11DB7};

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
    string s;
    hash_t prev;
    check(ref_crc_selftest(), "reference CRC check value");
    s = "123456789";
    for (int i = 0; i < 9; i++) msg9[8*i +: 8] = s[i];
    msg72 = '0;
    #1;
    check((out9 ^ CRC_XOROUT) == 32'hE3069283, $sformatf("check value %h", out9 ^ CRC_XOROUT));
    check((out9_ieee ^ CRC_XOROUT) == 32'hCBF43926,
          $sformatf("IEEE check value %h", out9_ieee ^ CRC_XOROUT));
    check(ref_crc(72'(msg9), 9, 32'h04C11DB7) == 32'hCBF43926, "reference IEEE check value");
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < 18; i++) msg72[32*i +: 32] = $urandom;
      #1;
      check((out72 ^ CRC_XOROUT) == ref_crc(msg72, 72),
            $sformatf("random message %0d: %h vs %h", n, out72 ^ CRC_XOROUT, ref_crc(msg72, 72)));
      for (int a = 0; a < 3; a++)
        check((out72_alt[a] ^ CRC_XOROUT) == ref_crc(msg72, 72, ALT_POLY[a]),
              $sformatf("polynomial %h, message %0d", ALT_POLY[a], n));
      prev = out72;
      msg72[$urandom_range(575, 0)] ^= 1'b1;
      #1;
      check(out72 != prev, "single-bit change must change the hash");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
