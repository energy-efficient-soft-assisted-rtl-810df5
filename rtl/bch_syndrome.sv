// bch_syndrome: syndrome-computation unit ("SYN" with its "=0" detector).
//
// Computes the syndromes S1, S3 and S5 of one N-bit component word of the
// BCH(255,231) code, S_k = sum over j of r_j * alpha^(k*j), and flags a zero
// syndrome. The unit is purely combinational: a fixed XOR network reading
// one row or one column of the data memory. The decoder holds one such unit
// per row and one per column (the paper's replicated syndrome units), so the
// inputs of each unit stay static except where the memory is corrected.
//
// N may be set below 255 to decode a shortened code (bits N..254 taken as
// zero); the paper's code uses N = 255. The zero flag is used downstream to
// gate the component-decoder pipeline, as the paper describes.
//
// Interface: r (N bits, bit j = coefficient of x^j) -> syn (S1,S3,S5), zero.
// Timing: combinational.
module bch_syndrome
  import pd_pkg::*;
#(
  parameter int unsigned N = pd_pkg::CODE_N
) (
  input  logic [N-1:0] r,
  output syn_t         syn,
  output logic         zero
);

  always_comb begin
    syn = '0;
    for (int unsigned j = 0; j < N; j++) begin
      if (r[j]) begin
        syn.s1 = syn.s1 ^ GF_EXP[j % GF_ORDER];
        syn.s3 = syn.s3 ^ GF_EXP[(3 * j) % GF_ORDER];
        syn.s5 = syn.s5 ^ GF_EXP[(5 * j) % GF_ORDER];
      end
    end
  end

  assign zero = (syn == '0);

endmodule
