// bch_chien: fully parallel Chien search ("CHIEN").
//
// Evaluates the error locator Lambda at alpha^(-j) for every bit position
// j = 0 .. N-1 at once and marks the positions where it vanishes. Each
// position is an independent set of three constant GF(2^8) multipliers
// (by alpha^(-j), alpha^(-2j), alpha^(-3j)) and an 8-bit zero test, so the
// search finishes in a single combinational pass, which is what the paper's
// non-iterative component decoders need. The paper names the unit but not
// its structure; the parallel form is this design's choice, made to fit the
// three-cycle half-iteration implied by the paper's latency figures.
//
// Interface: elp (lambda0..lambda3) -> err (N bits, bit j set = flip bit j).
// Timing: combinational.
module bch_chien
  import pd_pkg::*;
#(
  parameter int unsigned N = pd_pkg::CODE_N
) (
  input  elp_t         elp,
  output logic [N-1:0] err
);

  always_comb begin
    for (int unsigned j = 0; j < N; j++) begin
      gf_t v;
      // alpha^(-k*j) = alpha^((255 - j) * k mod 255)
      v = elp.l0
        ^ gf_mul(elp.l1, GF_EXP[(GF_ORDER - j) % GF_ORDER])
        ^ gf_mul(elp.l2, GF_EXP[(2 * (GF_ORDER - j)) % GF_ORDER])
        ^ gf_mul(elp.l3, GF_EXP[(3 * (GF_ORDER - j)) % GF_ORDER]);
      err[j] = (v == '0);
    end
  end

endmodule
