// data_memory: the N x N processing memory holding the hard decisions of
// one product-code block ("Data memory").
//
// Bit (i,j) sits in row i and column j. Row i is component word i in row
// mode (position j = column index); column j is component word j in column
// mode (position i = row index). A new block is written in one cycle on
// load. When wr_corr is high, component decoder k's error pattern is routed
// to row k (row mode) or column k (column mode), ANDed per bit with the
// reliability permission (the one AND gate per bit the paper adds for
// iBDD-SR) and XORed into the stored bit. Rows without a correction are not
// written, matching the paper's note that the memory is only clocked on a
// new block or a correction. Whole-block parallel load is this design's
// choice; the paper does not describe the input interface.
//
// Interface: load/hd_in, wr_corr, col_mode, corr[k] from decoder k,
//   allow from the reliability memory, mem (stored block, row-major).
// Timing: one register per bit; mem is the register output.
module data_memory #(
  parameter int unsigned N = pd_pkg::CODE_N
) (
  input  logic         clk,
  input  logic         load,
  input  logic [N-1:0] hd_in [N],
  input  logic         wr_corr,
  input  logic         col_mode,
  input  logic [N-1:0] corr  [N],
  input  logic [N-1:0] allow [N],
  output logic [N-1:0] mem   [N]
);

  logic [N-1:0] flip [N];

  // route each decoder's pattern to its row or column, then mask
  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      for (int unsigned j = 0; j < N; j++) begin
        flip[i][j] = (col_mode ? corr[j][i] : corr[i][j]) & allow[i][j];
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N; i++) begin
      if (load)                         mem[i] <= hd_in[i];
      else if (wr_corr && |flip[i])     mem[i] <= mem[i] ^ flip[i];
    end
  end

endmodule
