// bch_kes: non-iterative key-equation solver ("KES") for a t = 3 binary BCH
// code.
//
// The paper uses fast, non-iterative component decoders but does not give the
// solver's insides; this design uses the closed-form Peterson solution for
// three errors, multiplied through by D = S1^3 + S3 so that no division is
// needed:
//   D != 0            : Lambda(x) = D + S1*D x + A x^2 + (D^2 + S1*A) x^3,
//                       with A = S1^2*S3 + S5   (two or three errors)
//   D == 0, S1 != 0,
//     S5 == S1^5      : Lambda(x) = 1 + S1 x   (one error)
//   otherwise         : Lambda(x) = 1          (uncorrectable: no roots)
// Scaling by D leaves the roots unchanged. A zero syndrome also gives
// Lambda = 1 in the last branch, though the pipeline gates such words anyway.
//
// Interface: syn (S1,S3,S5) -> elp (lambda0..lambda3).
// Timing: combinational; registered in the component-decoder pipeline.
module bch_kes
  import pd_pkg::*;
(
  input  syn_t syn,
  output elp_t elp
);

  gf_t s1_2, s1_3, s1_5, d, a;

  always_comb begin
    s1_2 = gf_mul(syn.s1, syn.s1);
    s1_3 = gf_mul(s1_2, syn.s1);
    s1_5 = gf_mul(s1_3, s1_2);
    d    = s1_3 ^ syn.s3;
    a    = gf_mul(s1_2, syn.s3) ^ syn.s5;
    if (d != '0) begin
      elp.l0 = d;
      elp.l1 = gf_mul(syn.s1, d);
      elp.l2 = a;
      elp.l3 = gf_mul(d, d) ^ gf_mul(syn.s1, a);
    end else if (syn.s1 != '0 && syn.s5 == s1_5) begin
      elp.l0 = 8'h01;
      elp.l1 = syn.s1;
      elp.l2 = '0;
      elp.l3 = '0;
    end else begin
      elp.l0 = 8'h01;
      elp.l1 = '0;
      elp.l2 = '0;
      elp.l3 = '0;
    end
  end

endmodule
