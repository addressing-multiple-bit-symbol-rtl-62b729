// rs_syndrome -- syndrome computation for one RS(19,17,8) codeword.
//
// First phase of the SSC-RS decoder: evaluates the received polynomial at
// the two roots of the generator, S1 = r(alpha^1) and S2 = r(alpha^2),
// by Horner's rule over the 19 symbols. Both syndromes are zero for a
// valid codeword; nz flags any error. The paper expects this step to fit
// in one memory clock, and the read path gives it exactly one cycle per
// codeword (RS1..RS4 of the read timing).
//
// Interface: cw as in sscmsd_pkg (cw[i] is the coefficient of x^i).
// Timing: combinational.
module rs_syndrome
  import sscmsd_pkg::*;
(
  input  cw_t  cw,
  output sym_t s1,
  output sym_t s2,
  output logic nz
);

  localparam sym_t A1 = gf_alpha_pow(1);
  localparam sym_t A2 = gf_alpha_pow(2);

  always_comb begin
    sym_t a, b;
    a = '0;
    b = '0;
    for (int i = RS_N - 1; i >= 0; i--) begin
      a = gf_mul(a, A1) ^ cw[i];
      b = gf_mul(b, A2) ^ cw[i];
    end
    s1 = a;
    s2 = b;
    nz = (a != '0) || (b != '0);
  end

endmodule
