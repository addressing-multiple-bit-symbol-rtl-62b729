// tb_sscmsd_pkg -- self-checking testbench of the shared SSCMSD package.
//
// Checks the package's arithmetic against the independent reference model:
// the GF(2^8) product for all 65536 operand pairs, the alpha-power table
// (every power 0..254 against repeated multiplication, and that the 255
// entries are distinct, i.e. alpha is primitive for the chosen field
// polynomial), the CRC byte step for all 256 byte values from random
// states with every selectable polynomial, and the codeword <-> two-beat
// bus mapping (against the reference mapping, and as a round trip).
// No clock: each check is a direct function call.
module tb_sscmsd_pkg;
  import sscmsd_pkg::*;
  import sscmsd_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Reflected CRC step rebuilt from the MSB-first reference: one byte
  // message, initial state folded in through the linearity of the CRC.
  function automatic hash_t ref_step(hash_t state, logic [7:0] d, logic [31:0] poly);
    logic [8*72-1:0] m;
    hash_t zero_in, st_in;
    // CRC over one byte with init 0 equals (reference with init ~0 and
    // xorout ~0) XOR (contribution of the all-ones init).
    m = '0;
    m[7:0] = d;
    zero_in = ref_crc(m, 1, poly) ^ 32'hFFFF_FFFF;     // state after d from init ~0
    m[7:0] = 8'h00;
    st_in   = ref_crc(m, 1, poly) ^ 32'hFFFF_FFFF;     // state after 0x00 from init ~0
    // step(state, d) = step(~0, d) ^ step(~0, 0) ^ step(state, 0), and
    // step(state, 0) is linear in state: shift through 8 zero bits.
    return zero_in ^ st_in ^ zero_step(state, poly);
  endfunction

  function automatic hash_t zero_step(hash_t s, logic [31:0] poly);
    logic [31:0] r;
    r = ref_rev32(s);
    for (int b = 0; b < 8; b++) r = r[31] ? ((r << 1) ^ poly) : (r << 1);
    return ref_rev32(r);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static logic [31:0] POLY_N [4] = '{32'h1EDC6F41, 32'h741B8CD7, 32'h32583499, 32'h04C11DB7};
    static hash_t       POLY_R [4] = '{CRC32C_REFL, CRC32K_REFL, CRC32K2_REFL, CRC32_IEEE_REFL};
    bit seen [256];

    // GF(2^8) multiplication, exhaustive
    for (int a = 0; a < 256; a++)
      for (int b = 0; b < 256; b++)
        if (gf_mul(8'(a), 8'(b)) != ref_mul(8'(a), 8'(b)))
          check(0, $sformatf("gf_mul(%0h,%0h)", a, b));
    check(1, "gf_mul exhaustive");

    // alpha powers
    for (int e = 0; e < 255; e++) begin
      check(gf_alpha_pow(e) == ref_pow(8'h02, e), $sformatf("alpha^%0d", e));
      check(!seen[gf_alpha_pow(e)], $sformatf("alpha^%0d repeats an earlier power", e));
      seen[gf_alpha_pow(e)] = 1'b1;
    end
    check(gf_alpha_pow(255) == 8'h01, "alpha^255 = 1");
    check(gf_mul_alpha(8'h80) == GF_POLY_LOW, "x^8 reduction");

    // CRC byte step, every polynomial
    for (int p = 0; p < 4; p++)
      for (int n = 0; n < 8; n++) begin
        hash_t st;
        st = (n == 0) ? 32'hFFFF_FFFF : hash_t'($urandom);
        for (int d = 0; d < 256; d++)
          if (crc32c_byte(st, 8'(d), POLY_R[p]) != ref_step(st, 8'(d), POLY_N[p]))
            check(0, $sformatf("crc step poly %h state %h byte %0h", POLY_N[p], st, d));
        check(1, "crc step");
      end

    // bus mapping
    for (int n = 0; n < 200; n++) begin
      cw_t cw;
      beat_pair_t bp;
      for (int i = 0; i < int'(RS_N); i++) cw[i] = 8'($urandom);
      check(cw_to_beats(cw) == ref_beats(cw), "cw_to_beats mapping");
      check(beats_to_cw(cw_to_beats(cw)) == cw, "beat round trip");
      bp[0] = {$urandom, $urandom, 12'($urandom)};
      bp[1] = {$urandom, $urandom, 12'($urandom)};
      check(cw_to_beats(beats_to_cw(bp)) == bp, "codeword round trip");
    end
    // one chip's symbol touches only that chip's four lines
    begin
      cw_t cw;
      beat_pair_t bp;
      cw = '0;
      cw[7] = 8'hFF;
      bp = cw_to_beats(cw);
      check(bp[0] == (76'hF << 28) && bp[1] == (76'hF << 28), "chip 7 on DQ 28..31");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
