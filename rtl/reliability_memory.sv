// reliability_memory: one reliability bit per code bit ("Reliability mem.").
//
// Stores, for each of the N x N bits of the block, whether the channel
// output was less reliable than the threshold w (weak = 1). It is written
// only when a new block is loaded and is otherwise static, as in the paper.
// Its output is the per-bit correction permission used by the data memory:
// during iBDD-SR iterations only weak bits may be flipped; during the two
// plain iBDD clean-up iterations (sr_mode = 0) every bit may be flipped.
// The polarity of the stored bit (1 = weak) is this design's choice.
//
// Interface: load with weak_in (row-major, weak_in[i][j] = row i, column j),
//   sr_mode, allow (same layout).
// Timing: one register per bit; allow is combinational from it.
module reliability_memory #(
  parameter int unsigned N = pd_pkg::CODE_N
) (
  input  logic         clk,
  input  logic         load,
  input  logic [N-1:0] weak_in [N],
  input  logic         sr_mode,
  output logic [N-1:0] allow   [N]
);

  logic [N-1:0] weak_q [N];

  always_ff @(posedge clk) begin
    if (load) weak_q <= weak_in;
  end

  always_comb begin
    for (int unsigned i = 0; i < N; i++) allow[i] = sr_mode ? weak_q[i] : '1;
  end

endmodule
