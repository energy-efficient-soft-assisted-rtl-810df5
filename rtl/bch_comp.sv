// bch_comp: root-count check ("COMP").
//
// A bounded-distance decoder must only correct when the error locator of
// degree d has exactly d distinct roots among the N code positions; otherwise
// the word has more than t = 3 errors and is left unchanged. This unit
// counts the bits set by the Chien search and compares the count with the
// degree of Lambda. The paper labels the block "COMP" and draws it between
// the key-equation solver output and the Chien search; what it compares is
// this design's reading of the standard BCH decoding failure check.
//
// Interface: elp, err (N bits) -> ok (1 = correction may be applied).
// Timing: combinational.
module bch_comp
  import pd_pkg::*;
#(
  parameter int unsigned N = pd_pkg::CODE_N
) (
  input  elp_t         elp,
  input  logic [N-1:0] err,
  output logic         ok
);

  logic [$clog2(N+1)-1:0] count;
  logic [1:0]             degree;

  always_comb begin
    count = '0;
    for (int unsigned j = 0; j < N; j++) count = count + err[j];
    if      (elp.l3 != '0) degree = 2'd3;
    else if (elp.l2 != '0) degree = 2'd2;
    else if (elp.l1 != '0) degree = 2'd1;
    else                   degree = 2'd0;
    ok = (degree != 2'd0) && (count == $bits(count)'(degree));
  end

endmodule
