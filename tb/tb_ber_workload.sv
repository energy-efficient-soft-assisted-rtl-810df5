// tb_ber_workload: bit-error-rate runs of the full-size decoder over the
// quantized BI-AWGN channel, at the Eb/N0 points and iteration counts the
// output-BER curves are usually drawn for: 4.2, 4.3, 4.4 and 4.6 dB around
// the waterfall and 5.2 dB (input BER 1e-2), each with 3+2 and 8+2
// iterations (iBDD-SR + plain iBDD). Every decoded block must match the
// reference iBDD-SR model bit for bit, and from 4.4 dB on decoding must
// lower the bit-error rate. The measured input and output BER are printed.
// A handful of blocks per point is far too few for low-BER statistics;
// the run shows the trend, not the curve.
module tb_ber_workload;
  import tb_bch_pkg::*;

  localparam int  N      = 255;
  localparam int  BLOCKS = 3;
  localparam real RATE   = (231.0 * 231.0) / (255.0 * 255.0);

  logic         clk = 1'b0;
  logic         rst_n;
  logic         in_valid;
  logic         in_ready;
  logic [N-1:0] hd_in   [N];
  logic [N-1:0] weak_in [N];
  logic [3:0]   cfg_iters;
  logic         out_valid;
  logic         out_ready;
  logic [N-1:0] out_hd  [N];

  int checks = 0, failures = 0;

  product_decoder dut (.*);

  always #5 clk = !clk;

  initial begin
    #(10 * 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real    points [5] = '{4.2, 4.3, 4.4, 4.6, 5.2};
    int     iters_of [2] = '{5, 10};
    blk_t   c, hd, wk, ref_b;
    longint in_err, out_err;
    int     ref_diff;
    tb_init();
    rst_n = 1'b0; in_valid = 1'b0; out_ready = 1'b1; cfg_iters = 5;
    for (int i = 0; i < N; i++) begin hd_in[i] = '0; weak_in[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    foreach (points[p]) foreach (iters_of[q]) begin
      in_err = 0; out_err = 0;
      for (int b = 0; b < BLOCKS; b++) begin
        random_codeword(N, c);
        channel(c, N, points[p], RATE, 0.587, hd, wk);
        ref_b = hd;
        ibdd_sr(ref_b, wk, N, iters_of[q], 2);
        for (int i = 0; i < N; i++) begin
          hd_in[i] = hd[i]; weak_in[i] = wk[i];
          in_err += $countones(hd[i] ^ c[i]);
        end
        cfg_iters = 4'(iters_of[q]);
        @(posedge clk); #1 in_valid = 1'b1;
        do @(posedge clk); while (!in_ready);
        #1 in_valid = 1'b0;
        while (!out_valid) @(posedge clk);
        ref_diff = 0;
        for (int i = 0; i < N; i++) begin
          out_err  += $countones(out_hd[i] ^ c[i]);
          ref_diff += $countones(out_hd[i] ^ ref_b[i]);
        end
        checks++;
        if (ref_diff != 0) begin failures++; $display("%0d bits differ from reference", ref_diff); end
        @(posedge clk); #1;
      end
      $display("Eb/N0 %.1f dB, %0d+2 iterations: input BER %e, output BER %e (%0d blocks)",
               points[p], iters_of[q] - 2, real'(in_err) / (BLOCKS * N * N),
               real'(out_err) / (BLOCKS * N * N), BLOCKS);
      if (points[p] >= 4.4) begin
        checks++;
        if (out_err >= in_err) begin failures++; $display("decoding did not lower the BER"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
