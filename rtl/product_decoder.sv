// product_decoder: soft-assisted (iBDD-SR) decoder for the product code
// whose rows and columns are BCH(255,231) words correcting three errors:
// 65,025 coded and 53,361 information bits per block, 21.9 % overhead.
//
// Each received bit arrives as a hard decision (hd_in) and one reliability
// bit (weak_in = 1 when the channel output was less reliable than the
// threshold w). The hard decisions go to the data memory, which the
// component decoders correct in place; the reliability bits go to the
// reliability memory, written once per block. There are N component
// decoders, decoder k working on row k in row half-iterations and on
// column k in column half-iterations; each takes its syndrome from one of
// two replicated syndrome units (one per row, one per column) wired
// straight to the memory. During iBDD-SR iterations a correction is applied
// only to weak bits; the final two iterations are plain iBDD and may flip
// any bit. The structure follows the paper's block diagram; the schedule
// and the interface are described in decoder_ctrl.
//
// Interface: the whole block is presented at once on hd_in/weak_in
//   (row-major, [i][j] = row i, column j) with in_valid/in_ready, and the
//   decoded block, parity included, is offered on out_hd with
//   out_valid/out_ready. cfg_iters (5..10 in the paper) is sampled at load.
// Timing: one block every 6*cfg_iters + 2 cycles when out_ready is held high.
module product_decoder
  import pd_pkg::*;
#(
  parameter int unsigned N        = pd_pkg::CODE_N,
  parameter int unsigned ITER_W   = 4,
  parameter int unsigned HD_ITERS = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [N-1:0]      hd_in   [N],
  input  logic [N-1:0]      weak_in [N],
  input  logic [ITER_W-1:0] cfg_iters,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [N-1:0]      out_hd  [N]
);

  logic              load, cap_syn, cap_elp, wr_corr, col_mode, sr_mode;
  logic [ITER_W-1:0] iter;

  logic [N-1:0] mem   [N];
  logic [N-1:0] cols  [N];   // transposed view: cols[j][i] = mem[i][j]
  logic [N-1:0] allow [N];
  logic [N-1:0] corr  [N];
  syn_t         syn_r [N];
  syn_t         syn_c [N];
  logic         zero_r [N];
  logic         zero_c [N];
  logic         corr_valid [N];
  logic         vetoed [N];

  decoder_ctrl #(.ITER_W(ITER_W), .HD_ITERS(HD_ITERS)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .cfg_iters (cfg_iters),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .load      (load),
    .cap_syn   (cap_syn),
    .cap_elp   (cap_elp),
    .wr_corr   (wr_corr),
    .col_mode  (col_mode),
    .sr_mode   (sr_mode),
    .iter      (iter)
  );

  data_memory #(.N(N)) u_data (
    .clk      (clk),
    .load     (load),
    .hd_in    (hd_in),
    .wr_corr  (wr_corr),
    .col_mode (col_mode),
    .corr     (corr),
    .allow    (allow),
    .mem      (mem)
  );

  reliability_memory #(.N(N)) u_rel (
    .clk     (clk),
    .load    (load),
    .weak_in (weak_in),
    .sr_mode (sr_mode),
    .allow   (allow)
  );

  always_comb begin
    for (int unsigned i = 0; i < N; i++)
      for (int unsigned j = 0; j < N; j++)
        cols[j][i] = mem[i][j];
  end

  for (genvar k = 0; k < N; k++) begin : g_lane
    bch_syndrome #(.N(N)) u_syn_row (
      .r    (mem[k]),
      .syn  (syn_r[k]),
      .zero (zero_r[k])
    );

    bch_syndrome #(.N(N)) u_syn_col (
      .r    (cols[k]),
      .syn  (syn_c[k]),
      .zero (zero_c[k])
    );

    component_decoder #(.N(N)) u_dec (
      .clk        (clk),
      .rst_n      (rst_n),
      .syn_row    (syn_r[k]),
      .zero_row   (zero_r[k]),
      .syn_col    (syn_c[k]),
      .zero_col   (zero_c[k]),
      .col_mode   (col_mode),
      .cap_syn    (cap_syn),
      .cap_elp    (cap_elp),
      .corr       (corr[k]),
      .corr_valid (corr_valid[k]),
      .vetoed     (vetoed[k])
    );
  end

  assign out_hd = mem;

endmodule
