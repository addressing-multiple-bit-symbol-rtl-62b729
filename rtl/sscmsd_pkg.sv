// sscmsd_pkg -- shared constants, types and arithmetic of the SSCMSD
// (Single Symbol Correct, Multiple Symbol Detect) memory ECC.
//
// A 64-byte cache line is protected by four RS(19,17,8) codewords. Each
// codeword carries a 16-symbol data block, one 8-bit symbol of a 32-bit
// CRC hash of the line (and of its address), and two check symbols. A
// codeword is spread over 19 x4 DRAM chips and two bus beats, so one chip
// holds exactly one symbol of each codeword and a 76-line DQ bus moves the
// line in eight beats, two beats per controller clock.
//
// Conventions used by every module of the design:
//  * Symbols are elements of GF(2^8) built with the primitive polynomial
//    x^8+x^4+x^3+x^2+1 (0x11D) and primitive element alpha = 0x02. The
//    polynomial is this design's choice; the code construction itself,
//    generator G(x) = (x - alpha^1)(x - alpha^2), follows the paper.
//  * Codeword symbol i is the coefficient of x^i. Symbols 0 and 1 are the
//    check symbols C0 and C1, symbols 2..17 are data D0..D15 of the block
//    and symbol 18 is the hash symbol, the order C0 C1 D0..D15 H of the
//    published write-path drawing.
//  * Symbol i travels on chip i, DQ lines 4i..4i+3. Bit 2k+b of a symbol
//    is carried by pin k of that chip in beat b of the two-beat pair, so
//    each pin carries one adjacent bit pair of the symbol.
//  * Line byte j (bits 8j+7:8j) is data symbol j mod 16 of block j/16.
//  * The hash is CRC-32C (Castagnoli polynomial 0x1EDC6F41) in its usual
//    reflected form (the polynomial can be changed with the CRC_POLY_REFL
//    parameter of the paths and the top): initial value and final XOR 0xFFFFFFFF. The message is
//    the 64 line bytes, byte 0 first, followed by the 8 address bytes,
//    least significant byte first. Hash bits 8k+7:8k are hash symbol Hk,
//    stored in codeword k.
package sscmsd_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned SYM_W      = 8;              // bits per RS symbol (m)
  localparam int unsigned RS_N       = 19;             // symbols per codeword (n)
  localparam int unsigned RS_K       = 17;             // data + hash symbols (k)
  localparam int unsigned RS_NCHK    = RS_N - RS_K;    // check symbols (2)
  localparam int unsigned BLK_SYMS   = 16;             // data symbols per codeword
  localparam int unsigned NUM_CW     = 4;              // codewords per cache line
  localparam int unsigned LINE_BYTES = NUM_CW * BLK_SYMS;   // 64
  localparam int unsigned LINE_W     = LINE_BYTES * 8;      // 512
  localparam int unsigned ADDR_BYTES = 8;              // hashed address bytes
  localparam int unsigned ADDR_W     = ADDR_BYTES * 8; // 64
  localparam int unsigned HASH_W     = 32;
  localparam int unsigned CHIP_W     = 4;              // x4 devices
  localparam int unsigned NUM_CHIPS  = RS_N;           // 19 chips per rank
  localparam int unsigned DQ_W       = NUM_CHIPS * CHIP_W;  // 76 DQ lines
  localparam int unsigned BEATS_PER_CW = 2;

  localparam int unsigned SYM_POS_D0 = RS_NCHK;                 // 2
  localparam int unsigned SYM_POS_H  = RS_NCHK + BLK_SYMS;      // 18

  localparam logic [7:0]  GF_POLY_LOW  = 8'h1D;       // x^8 = x^4+x^3+x^2+1
  // CRC-32 polynomials in reflected (bit-reversed) form. The three HD=6
  // ones suit a 72-byte key; IEEE 802.3 (HD=5, odd parity) is given for
  // comparison. Castagnoli is the default of the design.
  localparam logic [31:0] CRC32C_REFL     = 32'h82F63B78; // Castagnoli 0x1EDC6F41
  localparam logic [31:0] CRC32K_REFL     = 32'hEB31D82E; // Koopman {1,3,28} 0x741B8CD7
  localparam logic [31:0] CRC32K2_REFL    = 32'h992C1A4C; // Koopman {1,1,30} 0x32583499
  localparam logic [31:0] CRC32_IEEE_REFL = 32'hEDB88320; // IEEE 802.3 0x04C11DB7
  localparam logic [31:0] CRC_INIT     = 32'hFFFF_FFFF;
  localparam logic [31:0] CRC_XOROUT   = 32'hFFFF_FFFF;

  // ---------------------------------------------------------------- types
  typedef logic [SYM_W-1:0]          sym_t;
  typedef sym_t [RS_N-1:0]           cw_t;        // cw[i]: coefficient of x^i
  typedef sym_t [RS_K-1:0]           dw_t;        // dw[0..15] data, dw[16] hash
  typedef logic [DQ_W-1:0]           beat_t;
  typedef beat_t [BEATS_PER_CW-1:0]  beat_pair_t; // [0] is the earlier beat
  typedef logic [LINE_W-1:0]         line_t;
  typedef logic [ADDR_W-1:0]         addr_t;
  typedef logic [HASH_W-1:0]         hash_t;

  // Outcome reported with every read response.
  typedef enum logic [1:0] {
    RD_NO_ERROR      = 2'd0,  // scenario 1: hash matches, all syndromes zero
    RD_CORRECTED     = 2'd1,  // codewords corrected and the hash re-check passed
    RD_UNCORRECTABLE = 2'd2   // DUE: scenario 3, a DUE codeword or H2 != H''
  } rd_status_t;

  // Scenario of the first decision step (decision table, Table 4 of the
  // paper, numbered 1..4 there and 0..3 here).
  typedef enum logic [1:0] {
    SCN1_CLEAN        = 2'd0,  // H1 == H', all Si == 0
    SCN2_SYND         = 2'd1,  // H1 == H', some Si != 0
    SCN3_HASH_ONLY    = 2'd2,  // H1 != H', all Si == 0
    SCN4_HASH_SYND    = 2'd3   // H1 != H', some Si != 0
  } scenario_t;

  // ------------------------------------------------------ GF(2^8) arithmetic
  function automatic sym_t gf_mul_alpha(sym_t a);
    return a[7] ? ((a << 1) ^ GF_POLY_LOW) : (a << 1);
  endfunction

  // Shift-and-add multiplication, reducing after every shift.
  function automatic sym_t gf_mul(sym_t a, sym_t b);
    sym_t p;
    sym_t aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < SYM_W; i++) begin
      if (b[i]) p = p ^ aa;
      aa = gf_mul_alpha(aa);
    end
    return p;
  endfunction

  // Table of alpha^0 .. alpha^254 (alpha^255 = alpha^0), built at elaboration.
  function automatic logic [255*SYM_W-1:0] gf_exp_table();
    logic [255*SYM_W-1:0] t;
    sym_t r;
    r = 8'h01;
    for (int i = 0; i < 255; i++) begin
      t[i*SYM_W +: SYM_W] = r;
      r = gf_mul_alpha(r);
    end
    return t;
  endfunction

  localparam logic [255*SYM_W-1:0] GF_EXP = gf_exp_table();

  // alpha^e; used with constant exponents.
  function automatic sym_t gf_alpha_pow(int unsigned e);
    return GF_EXP[(e % 255)*SYM_W +: SYM_W];
  endfunction

  // ------------------------------------------------------------ CRC-32C
  // One byte of a reflected CRC-32, LSB first; poly_refl selects the polynomial.
  function automatic hash_t crc32c_byte(hash_t crc, logic [7:0] d, hash_t poly_refl);
    hash_t c;
    c = crc ^ {24'h0, d};
    for (int i = 0; i < 8; i++) c = c[0] ? ((c >> 1) ^ poly_refl) : (c >> 1);
    return c;
  endfunction

  // ------------------------------------------------ codeword <-> bus beats
  function automatic beat_pair_t cw_to_beats(cw_t cw);
    beat_pair_t bp;
    for (int i = 0; i < NUM_CHIPS; i++)
      for (int k = 0; k < CHIP_W; k++)
        for (int b = 0; b < BEATS_PER_CW; b++)
          bp[b][CHIP_W*i + k] = cw[i][2*k + b];
    return bp;
  endfunction

  function automatic cw_t beats_to_cw(beat_pair_t bp);
    cw_t cw;
    for (int i = 0; i < NUM_CHIPS; i++)
      for (int k = 0; k < CHIP_W; k++)
        for (int b = 0; b < BEATS_PER_CW; b++)
          cw[i][2*k + b] = bp[b][CHIP_W*i + k];
    return cw;
  endfunction

endpackage
