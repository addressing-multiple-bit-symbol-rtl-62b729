// crc32c_update -- combinational CRC-32C update over NBYTES message bytes.
//
// This is the hash function of the SSCMSD scheme. The paper selects a
// CRC-32 with minimum Hamming distance 6 at a 72-byte key (Castagnoli,
// Koopman32k or Koopman32k2) because it is simple, linear and can be built
// as combinational logic; this design uses the Castagnoli polynomial by
// default. POLY_REFL, the polynomial in reflected form, selects another one
// (sscmsd_pkg lists the Koopman polynomials and IEEE 802.3).
// Linearity lets the read path fold the line in one 16-byte block per
// cycle, so the module takes a running CRC state in and gives the updated
// state out; the caller applies the initial value and final XOR
// (sscmsd_pkg::CRC_INIT / CRC_XOROUT, both 0xFFFFFFFF, the usual CRC-32C
// convention, which is this design's choice).
//
// Interface: data byte j is data[8j+7:8j] and is consumed before byte j+1.
// Timing: purely combinational, no clock; NBYTES=72 (64-byte line plus
// 8-byte address) is the whole hash in one step.
module crc32c_update
  import sscmsd_pkg::*;
#(
  parameter int unsigned NBYTES    = LINE_BYTES + ADDR_BYTES,
  parameter hash_t       POLY_REFL = CRC32C_REFL
) (
  input  hash_t                 crc_in,
  input  logic [8*NBYTES-1:0]   data,
  output hash_t                 crc_out
);

  always_comb begin
    hash_t c;
    c = crc_in;
    for (int j = 0; j < int'(NBYTES); j++) c = crc32c_byte(c, data[8*j +: 8], POLY_REFL);
    crc_out = c;
  end

endmodule
