// tb_product_decoder_full: the decoder at its full size, BCH(255,231)
// components and 255 x 255-bit blocks, with every parameter at its default.
// Two blocks pass through the quantized BI-AWGN channel at Eb/N0 = 5.2 dB
// (input BER near 1e-2), the first decoded with 5 iterations (3 iBDD-SR +
// 2 iBDD), the second with 10 (8 + 2). Each output block is compared bit
// for bit with the reference iBDD-SR model, and with the transmitted
// codeword, and the load-to-output latency must be 6*I + 1 cycles (block
// period 6*I + 2: 32 cycles, 53.3 ns at 600 MHz, for I = 5).
module tb_product_decoder_full;
  import tb_bch_pkg::*;

  localparam int N = 255;
  localparam real RATE = (231.0 * 231.0) / (255.0 * 255.0);

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
  longint cycle = 0;

  product_decoder dut (.*);

  always #5 clk = !clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #(10 * 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    blk_t c, hd, wk, ref_b;
    longint t_load;
    int in_err, out_err, ref_diff;
    tb_init();
    rst_n = 1'b0; in_valid = 1'b0; out_ready = 1'b1; cfg_iters = 5;
    for (int i = 0; i < N; i++) begin hd_in[i] = '0; weak_in[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int b = 0; b < 2; b++) begin
      int iters;
      iters = b ? 10 : 5;
      random_codeword(N, c);
      channel(c, N, 5.2, RATE, 0.587, hd, wk);
      ref_b = hd;
      ibdd_sr(ref_b, wk, N, iters, 2);
      in_err = 0;
      for (int i = 0; i < N; i++) begin
        hd_in[i]   = hd[i];
        weak_in[i] = wk[i];
        in_err += $countones(hd[i] ^ c[i]);
      end
      cfg_iters = 4'(iters);
      @(posedge clk); #1 in_valid = 1'b1;
      do @(posedge clk); while (!in_ready);
      t_load = cycle;
      #1 in_valid = 1'b0;
      while (!out_valid) @(posedge clk);
      checks++;
      if (cycle - t_load != 6 * iters + 1) begin
        failures++; $display("latency %0d cycles", cycle - t_load);
      end
      out_err = 0; ref_diff = 0;
      for (int i = 0; i < N; i++) begin
        out_err  += $countones(out_hd[i] ^ c[i]);
        ref_diff += $countones(out_hd[i] ^ ref_b[i]);
      end
      $display("block %0d, %0d iterations: %0d channel errors (BER %f), %0d after decoding",
               b, iters, in_err, real'(in_err) / (N * N), out_err);
      checks += 2;
      if (ref_diff != 0) begin failures++; $display("%0d bits differ from reference", ref_diff); end
      if (out_err != 0) begin failures++; $display("block not decoded to the codeword"); end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
