// rs_encoder -- systematic RS(19,17,8) encoder.
//
// Encodes a 17-symbol dataword (16 data symbols of one cache-line block and
// one hash symbol) into the 19-symbol codeword stored across the 19 chips
// of a rank. The generator polynomial is the paper's
// G(x) = (x - alpha^1)(x - alpha^2) = x^2 + (alpha+alpha^2) x + alpha^3,
// so two check symbols give single-symbol correction. The codeword is
// c(x) = x^2 m(x) + (x^2 m(x) mod G(x)) with m(x) = sum dw[j] x^j; the
// remainder comes from the usual two-register division circuit, unrolled
// over the 17 symbols (highest degree first). The symbol order C0 C1
// D0..D15 H follows the published drawing; the field polynomial and the
// degree assignment are this design's choices (see sscmsd_pkg).
//
// Interface: dw[0..15] data symbols D0..D15, dw[16] hash symbol.
// cw[0]=C0, cw[1]=C1, cw[2+j]=dw[j]. Timing: combinational. Because the
// code is systematic, 136 of the 152 output bits are the input symbols
// wired straight through; only C0 and C1 are computed.
module rs_encoder
  import sscmsd_pkg::*;
(
  input  dw_t dw,
  output cw_t cw
);

  localparam sym_t G1 = gf_alpha_pow(1) ^ gf_alpha_pow(2); // coefficient of x^1
  localparam sym_t G0 = gf_alpha_pow(3);                   // coefficient of x^0

  always_comb begin
    sym_t r0, r1, fb;
    r0 = '0;
    r1 = '0;
    for (int j = RS_K - 1; j >= 0; j--) begin
      fb = dw[j] ^ r1;
      r1 = r0 ^ gf_mul(fb, G1);
      r0 = gf_mul(fb, G0);
    end
    cw[0] = r0;
    cw[1] = r1;
    for (int j = 0; j < int'(RS_K); j++) cw[RS_NCHK + j] = dw[j];
  end

endmodule
