// sscmsd_ref_pkg -- reference model used by the SSCMSD testbenches.
//
// Recomputes what the RTL computes, by different methods, so that the
// testbenches do not check the design against itself:
//  * GF(2^8) product: carry-less 15-bit product, then reduction modulo
//    0x11D from the top bit down (the RTL reduces after every shift).
//  * RS(19,17,8) check symbols: solved from the two parity equations
//    c(alpha) = c(alpha^2) = 0 with a field inverse (the RTL divides by the
//    generator polynomial).
//  * Syndromes: direct sums of c_i * alpha^(i*j) (the RTL uses Horner).
//  * CRC-32C: MSB-first division by 0x1EDC6F41 on bit-reversed bytes, with
//    the result bit-reversed (the RTL uses the reflected LSB-first form).
//    Other CRC-32 polynomials are given in normal (MSB-first) form.
//    ref_crc_selftest() checks it on the standard check value
//    CRC-32C("123456789") = 0xE3069283.
//  * Bus mapping: symbol bit 2k+b <-> chip pin k, beat b, written out
//    independently of the package functions.
package sscmsd_ref_pkg;
  import sscmsd_pkg::*;

  function automatic sym_t ref_mul(sym_t a, sym_t b);
    logic [14:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 15'(a) << i;
    for (int i = 14; i >= 8; i--) if (p[i]) p ^= 15'(9'h11D) << (i - 8);
    return p[7:0];
  endfunction

  function automatic sym_t ref_pow(sym_t a, int unsigned e);
    sym_t r;
    r = 8'h01;
    for (int unsigned i = 0; i < e; i++) r = ref_mul(r, a);
    return r;
  endfunction

  function automatic sym_t ref_inv(sym_t a);
    return ref_pow(a, 254);
  endfunction

  function automatic sym_t ref_syn(cw_t cw, int unsigned j);
    sym_t s;
    s = '0;
    for (int i = 0; i < int'(RS_N); i++) s ^= ref_mul(cw[i], ref_pow(8'h02, (j * i) % 255));
    return s;
  endfunction

  function automatic cw_t ref_encode(dw_t dw);
    cw_t  cw;
    sym_t m1, m2, c1;
    cw = '0;
    for (int j = 0; j < int'(RS_K); j++) cw[2 + j] = dw[j];
    m1 = ref_syn(cw, 1);
    m2 = ref_syn(cw, 2);
    // C0 + C1*a + m1 = 0 and C0 + C1*a^2 + m2 = 0
    c1 = ref_mul(m1 ^ m2, ref_inv(8'h02 ^ 8'h04));
    cw[1] = c1;
    cw[0] = m1 ^ ref_mul(c1, 8'h02);
    return cw;
  endfunction

  function automatic logic [31:0] ref_rev32(logic [31:0] x);
    logic [31:0] r;
    for (int i = 0; i < 32; i++) r[i] = x[31 - i];
    return r;
  endfunction

  // Reflected CRC-32 of nbytes bytes of msg (byte j = msg[8j+7:8j]), with
  // the polynomial in normal form (default Castagnoli, CRC-32C).
  function automatic hash_t ref_crc(logic [8*72-1:0] msg, int unsigned nbytes,
                                    logic [31:0] poly = 32'h1EDC6F41);
    logic [31:0] r;
    logic        fb;
    r = 32'hFFFF_FFFF;
    for (int unsigned j = 0; j < nbytes; j++)
      for (int b = 0; b < 8; b++) begin       // bit b of the byte first
        fb = r[31] ^ msg[8*j + b];
        r  = {r[30:0], 1'b0};
        if (fb) r ^= poly;
      end
    return ref_rev32(r) ^ 32'hFFFF_FFFF;
  endfunction

  function automatic hash_t ref_line_hash(line_t line, addr_t addr,
                                         logic [31:0] poly = 32'h1EDC6F41);
    return ref_crc({addr, line}, 72, poly);
  endfunction

  function automatic bit ref_crc_selftest();
    logic [8*72-1:0] m;
    string s;
    s = "123456789";
    m = '0;
    for (int i = 0; i < 9; i++) m[8*i +: 8] = s[i];
    return ref_crc(m, 9) == 32'hE3069283;
  endfunction

  // Four codewords of a line, as the write path must produce them.
  function automatic cw_t ref_line_cw(line_t line, addr_t addr, int unsigned k,
                                     logic [31:0] poly = 32'h1EDC6F41);
    dw_t   dw;
    hash_t h;
    h = ref_line_hash(line, addr, poly);
    for (int j = 0; j < 16; j++) dw[j] = line[8*(16*k + j) +: 8];
    dw[16] = h[8*k +: 8];
    return ref_encode(dw);
  endfunction

  function automatic beat_pair_t ref_beats(cw_t cw);
    beat_pair_t bp;
    for (int chip = 0; chip < 19; chip++)
      for (int pin = 0; pin < 4; pin++) begin
        bp[0][4*chip + pin] = cw[chip][2*pin];
        bp[1][4*chip + pin] = cw[chip][2*pin + 1];
      end
    return bp;
  endfunction

  function automatic line_t rand_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  function automatic addr_t rand_addr();
    return {$urandom, $urandom};
  endfunction

endpackage
