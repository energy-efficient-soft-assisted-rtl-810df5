// decoder_ctrl: block and iteration sequencer of the product decoder.
//
// A block is accepted in the IDLE state (in_valid && in_ready), which
// loads both memories. Decoding then runs cfg_iters iterations, each a row
// half-iteration followed by a column half-iteration. A half-iteration takes
// three cycles: phase 0 captures the syndromes in the component decoders
// (cap_syn), phase 1 captures the error locators (cap_elp), phase 2 applies
// the corrections to the data memory (wr_corr). The first cfg_iters - 2
// iterations are iBDD-SR iterations (sr_mode = 1, corrections masked by the
// reliability bits); the last HD_ITERS = 2 are plain iBDD clean-up
// iterations, as the paper prescribes. The block is then offered on the
// output (out_valid) until out_ready, after which the next block may load.
//
// One block therefore occupies 6*I + 2 cycles for I iterations: 32 cycles,
// 53.3 ns at 600 MHz, for I = 5 and 62 cycles, 103.3 ns, for I = 10, which
// reproduces the paper's latency (53-103 ns) and, with 231*231 information
// bits per block, its throughput (1000 down to 516 Gb/s). The three-phase
// split and the one-cycle load and output steps are this design's choice,
// made to match those figures; the paper gives no cycle-level schedule.
//
// Interface: in_valid/in_ready, out_valid/out_ready handshakes (valid may
//   not be withdrawn before ready), cfg_iters sampled at load (0 acts as 1).
// Timing: all outputs come from registers or the state decode.
module decoder_ctrl #(
  parameter int unsigned ITER_W   = 4,
  parameter int unsigned HD_ITERS = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [ITER_W-1:0] cfg_iters,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              load,
  output logic              cap_syn,
  output logic              cap_elp,
  output logic              wr_corr,
  output logic              col_mode,
  output logic              sr_mode,
  output logic [ITER_W-1:0] iter
);

  typedef enum logic [1:0] {
    ST_IDLE,
    ST_DECODE,
    ST_DONE
  } state_e;

  state_e            state_q;
  logic [1:0]        phase_q;
  logic              col_q;
  logic [ITER_W-1:0] iter_q;
  logic [ITER_W-1:0] iters_q;   // iterations of the current block

  assign in_ready  = (state_q == ST_IDLE);
  assign load      = in_valid && in_ready;
  assign out_valid = (state_q == ST_DONE);
  assign cap_syn   = (state_q == ST_DECODE) && (phase_q == 2'd0);
  assign cap_elp   = (state_q == ST_DECODE) && (phase_q == 2'd1);
  assign wr_corr   = (state_q == ST_DECODE) && (phase_q == 2'd2);
  assign col_mode  = col_q;
  assign iter      = iter_q;
  // iBDD-SR for all but the last HD_ITERS iterations
  assign sr_mode   = ({1'b0, iter_q} + (ITER_W+1)'(HD_ITERS)) < {1'b0, iters_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      phase_q <= 2'd0;
      col_q   <= 1'b0;
      iter_q  <= '0;
      iters_q <= ITER_W'(1);
    end else begin
      unique case (state_q)
        ST_IDLE: begin
          if (in_valid) begin
            state_q <= ST_DECODE;
            phase_q <= 2'd0;
            col_q   <= 1'b0;
            iter_q  <= '0;
            iters_q <= (cfg_iters == '0) ? ITER_W'(1) : cfg_iters;
          end
        end
        ST_DECODE: begin
          if (phase_q != 2'd2) begin
            phase_q <= phase_q + 2'd1;
          end else begin
            phase_q <= 2'd0;
            col_q   <= !col_q;
            if (col_q) begin
              if (iter_q + ITER_W'(1) == iters_q) state_q <= ST_DONE;
              else                                iter_q  <= iter_q + ITER_W'(1);
            end
          end
        end
        ST_DONE: begin
          if (out_ready) state_q <= ST_IDLE;
        end
        default: state_q <= ST_IDLE;
      endcase
    end
  end

  // The output block must stay offered until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid);

endmodule
