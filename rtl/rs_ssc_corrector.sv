// rs_ssc_corrector -- single-symbol error correction for RS(19,17,8).
//
// Second, slower phase of the SSC-RS decoder, used only for codewords whose
// syndrome is non-zero. A single error of value e at position p gives
// S1 = e*alpha^p and S2 = e*alpha^(2p), so S2 = S1*alpha^p and
// e = S1*alpha^(-p). The module compares S2 with S1*alpha^i for all 19
// positions in parallel (constant multipliers only) and, on a hit, adds
// S1*alpha^(-i) to symbol i. Any other non-zero syndrome pattern (one of
// S1, S2 zero, or no position matching) is a detectable but uncorrectable
// error (DUE). For a code that corrects one symbol this gives the same
// result as the Berlekamp-Massey decoder the paper simulates; the
// direct, parallel form is this design's choice.
//
// Interface: cw and its syndromes s1/s2 in; cw_out is the corrected
// codeword (cw unchanged when there is no error or on a DUE), ce marks a
// corrected symbol at err_pos, due an uncorrectable codeword.
// Timing: combinational.
module rs_ssc_corrector
  import sscmsd_pkg::*;
(
  input  cw_t         cw,
  input  sym_t        s1,
  input  sym_t        s2,
  output cw_t         cw_out,
  output logic        ce,
  output logic        due,
  output logic [4:0]  err_pos
);

  logic [RS_N-1:0] hit;

  always_comb begin
    for (int i = 0; i < int'(RS_N); i++)
      hit[i] = (s1 != '0) && (gf_mul(s1, gf_alpha_pow(i)) == s2);
  end

  always_comb begin
    cw_out  = cw;
    ce      = 1'b0;
    due     = 1'b0;
    err_pos = '0;
    if (s1 != '0 || s2 != '0) begin
      due = 1'b1;
      for (int i = 0; i < int'(RS_N); i++) begin
        if (hit[i]) begin
          cw_out[i] = cw[i] ^ gf_mul(s1, gf_alpha_pow(255 - i));
          ce        = 1'b1;
          due       = 1'b0;
          err_pos   = 5'(i);
        end
      end
    end
  end

endmodule
