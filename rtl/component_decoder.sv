// component_decoder: one pipelined bounded-distance BCH component decoder,
// shared by row i and column i of the product code.
//
// Stage 1 (phase 0): the syndrome of the row (row mode) or of the column
//   (column mode) is selected, together with its zero flag, and captured in
//   an enabled register. The register is only enabled when the syndrome is
//   non-zero, so a word without errors leaves the rest of the pipeline static.
// Stage 2 (phase 1): the key-equation solver works on the captured syndrome;
//   its result is captured in a second enabled register, enabled only when
//   stage 1 held a non-zero syndrome. A one-bit register that is never gated
//   carries the "non-zero" flag alongside, one stage at a time.
// Stage 3 (phase 2): the Chien search and the root-count check (COMP) run on
//   the captured locator; the error pattern is ANDed with the check result
//   and with the delayed non-zero flag and presented as corr for the memory
//   to apply at the end of the phase.
// This sequential gating on a zero syndrome, the enabled registers around
// the KES and the syndrome and zero-flag multiplexers follow the paper's
// block diagram. The three-cycle spacing of the stages is this design's
// reading of the latency table (see decoder_ctrl).
//
// Interface: syn_row/zero_row and syn_col/zero_col from the two syndrome
//   units, col_mode selects between them, cap_syn and cap_elp are the stage
//   strobes from the controller. corr (N bits) and corr_valid are valid in
//   the cycle after cap_elp. vetoed reports a non-zero syndrome whose
//   correction COMP rejected.
// Timing: two registers; corr is combinational from the second.
module component_decoder
  import pd_pkg::*;
#(
  parameter int unsigned N = pd_pkg::CODE_N
) (
  input  logic         clk,
  input  logic         rst_n,
  input  syn_t         syn_row,
  input  logic         zero_row,
  input  syn_t         syn_col,
  input  logic         zero_col,
  input  logic         col_mode,
  input  logic         cap_syn,
  input  logic         cap_elp,
  output logic [N-1:0] corr,
  output logic         corr_valid,
  output logic         vetoed
);

  syn_t         syn_sel, syn_q;
  logic         zero_sel;
  logic         nz1_q, nz2_q;
  elp_t         elp_d, elp_q;
  logic [N-1:0] err;
  logic         ok;

  // syndrome and zero-flag multiplexers
  assign syn_sel  = col_mode ? syn_col  : syn_row;
  assign zero_sel = col_mode ? zero_col : zero_row;

  // stage-1 register, enabled only for a non-zero syndrome
  always_ff @(posedge clk) begin
    if (cap_syn && !zero_sel) syn_q <= syn_sel;
  end

  // flag registers, not gated
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nz1_q <= 1'b0;
      nz2_q <= 1'b0;
    end else begin
      if (cap_syn) nz1_q <= !zero_sel;
      if (cap_elp) nz2_q <= nz1_q;
    end
  end

  bch_kes u_kes (
    .syn (syn_q),
    .elp (elp_d)
  );

  // stage-2 register, enabled only behind a non-zero syndrome
  always_ff @(posedge clk) begin
    if (cap_elp && nz1_q) elp_q <= elp_d;
  end

  bch_chien #(.N(N)) u_chien (
    .elp (elp_q),
    .err (err)
  );

  bch_comp #(.N(N)) u_comp (
    .elp (elp_q),
    .err (err),
    .ok  (ok)
  );

  assign corr_valid = nz2_q && ok;
  assign corr       = corr_valid ? err : '0;
  assign vetoed     = nz2_q && !ok;

endmodule
