// tb_product_decoder: end-to-end test of the soft-assisted product decoder.
//
// Runs whole blocks through the decoder and compares every output bit with
// the reference iBDD-SR model of tb_bch_pkg, and, where the errors are few
// enough, with the transmitted codeword. The scenarios: sparse wk errors
// (all corrected), errors on bits marked reliable (blocked during iBDD-SR,
// then fixed by the two plain iBDD iterations), BI-AWGN blocks near the
// input BER of 1e-2, and heavy noise where component decoders fail. It uses
// both ends of the paper's iteration range (5 and 10), checks the block
// period of 6*I + 2 cycles, and holds out_ready low for a while. It counts
// how often each mechanism happened in the decoder itself: zero-syndrome
// gating, corrections, COMP vetoes, corrections blocked by the reliability
// mask, clean-up corrections of reliable bits, output stalls.
// N defaults to a shortened 63-bit component code to keep the run short.
module tb_product_decoder;
  import tb_bch_pkg::*;

  localparam int N      = 63;
  localparam int ITER_W = 4;
  localparam real RATE  = real'(N - 24) * real'(N - 24) / (real'(N) * real'(N));

  logic              clk = 1'b0;
  logic              rst_n;
  logic              in_valid;
  logic              in_ready;
  logic [N-1:0]      hd_in   [N];
  logic [N-1:0]      weak_in [N];
  logic [ITER_W-1:0] cfg_iters;
  logic              out_valid;
  logic              out_ready;
  logic [N-1:0]      out_hd  [N];

  int checks = 0, failures = 0;
  int n_gated = 0, n_corr = 0, n_veto = 0, n_blocked = 0, n_cleanup = 0, n_stall = 0;
  longint cycle = 0;

  product_decoder #(.N(N), .ITER_W(ITER_W)) dut (.*);

  always #5 clk = !clk;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters, observed inside the decoder
  always @(posedge clk) if (rst_n) begin
    if (dut.cap_syn)
      for (int k = 0; k < N; k++)
        n_gated += int'(dut.col_mode ? dut.zero_c[k] : dut.zero_r[k]);
    if (dut.wr_corr)
      for (int k = 0; k < N; k++) begin
        n_veto += int'(dut.vetoed[k]);
        for (int p = 0; p < N; p++) if (dut.corr[k][p]) begin
          int i, j;
          i = dut.col_mode ? p : k;
          j = dut.col_mode ? k : p;
          n_corr++;
          if (!dut.allow[i][j]) n_blocked++;
          else if (!dut.sr_mode && !dut.u_rel.weak_q[i][j]) n_cleanup++;
        end
      end
    if (out_valid && !out_ready) n_stall++;
  end

  initial begin
    #(10 * 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_block(input blk_t c, input blk_t hd, input blk_t wk,
                           input int iters, input bit expect_clean, input int stall);
    blk_t   ref_b;
    longint t_load, t_out;
    int     bad;
    ref_b = hd;
    ibdd_sr(ref_b, wk, N, iters, 2);
    for (int i = 0; i < N; i++) begin
      hd_in[i]   = hd[i][N-1:0];
      weak_in[i] = wk[i][N-1:0];
    end
    cfg_iters = ITER_W'(iters);
    in_valid  = 1'b1;
    do @(posedge clk); while (!in_ready);
    t_load = cycle;
    #1 in_valid = 1'b0;
    out_ready = (stall == 0);
    while (!out_valid) @(posedge clk);
    t_out = cycle;
    checks++;
    if (t_out - t_load != 6 * iters + 1) begin
      failures++;
      $display("latency %0d, expected %0d", t_out - t_load, 6 * iters + 1);
    end
    if (stall != 0) begin
      repeat (stall) @(posedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("out_valid dropped"); end
      #1 out_ready = 1'b1;
      #1;
    end
    bad = 0;
    for (int i = 0; i < N; i++)
      if (out_hd[i] != ref_b[i][N-1:0]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("%0d rows differ from reference model", bad); end
    if (expect_clean) begin
      bad = 0;
      for (int i = 0; i < N; i++) if (out_hd[i] != c[i][N-1:0]) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("%0d rows not decoded to codeword", bad); end
    end
    @(posedge clk);
    #1;
  endtask

  task automatic check_period(input int iters);
    longint t0, t1;
    blk_t c;
    for (int i = 0; i < 255; i++) c[i] = '0;
    for (int i = 0; i < N; i++) begin hd_in[i] = '0; weak_in[i] = '0; end
    cfg_iters = ITER_W'(iters);
    out_ready = 1'b1;
    in_valid  = 1'b1;
    do @(posedge clk); while (!in_ready);
    t0 = cycle;
    @(posedge clk);
    do @(posedge clk); while (!in_ready);
    t1 = cycle;
    #1 in_valid = 1'b0;
    checks++;
    if (t1 - t0 != 6 * iters + 2) begin
      failures++;
      $display("block period %0d cycles, expected %0d", t1 - t0, 6 * iters + 2);
    end
    while (!out_valid) @(posedge clk);
    @(posedge clk);
    #1;
  endtask

  initial begin
    blk_t c, hd, wk;
    tb_init();
    rst_n = 1'b0; in_valid = 1'b0; out_ready = 1'b1; cfg_iters = 5;
    for (int i = 0; i < N; i++) begin hd_in[i] = '0; weak_in[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;

    // 1: up to three wk errors in a few rows -> decoded to the codeword
    random_codeword(N, c);
    hd = c;
    for (int i = 0; i < 255; i++) wk[i] = '0;
    for (int i = 0; i < N; i += 7)
      for (int e = 0; e < 3; e++) begin
        int j; j = $urandom_range(N - 1);
        hd[i][j] = !c[i][j]; wk[i][j] = 1'b1;
      end
    run_block(c, hd, wk, 5, 1'b1, 0);

    // 2: reliable errors: masked in iBDD-SR, fixed in the clean-up iterations
    random_codeword(N, c);
    hd = c;
    for (int i = 0; i < 255; i++) wk[i] = '0;
    for (int i = 0; i < N; i += 5) begin
      int j; j = $urandom_range(N - 1);
      hd[i][j] = !c[i][j];
      wk[(i + 3) % N][(j + 11) % N] = 1'b1;
    end
    run_block(c, hd, wk, 5, 1'b1, 7);

    // 3: BI-AWGN blocks, 5 and 10 iterations
    for (int b = 0; b < 4; b++) begin
      random_codeword(N, c);
      channel(c, N, 4.6, RATE, 0.587, hd, wk);
      run_block(c, hd, wk, (b % 2) ? 10 : 5, 1'b0, 0);
    end

    // 4: heavy noise, many component failures
    random_codeword(N, c);
    channel(c, N, 2.0, RATE, 0.587, hd, wk);
    run_block(c, hd, wk, 6, 1'b0, 3);

    // 5: block period at both ends of the iteration range
    check_period(5);
    check_period(10);

    $display("mechanisms: gated=%0d corrections=%0d vetoes=%0d blocked=%0d cleanup=%0d stall_cycles=%0d",
             n_gated, n_corr, n_veto, n_blocked, n_cleanup, n_stall);
    checks += 6;
    if (n_gated   == 0) begin failures++; $display("zero-syndrome gating never happened"); end
    if (n_corr    == 0) begin failures++; $display("no correction happened"); end
    if (n_veto    == 0) begin failures++; $display("COMP never vetoed"); end
    if (n_blocked == 0) begin failures++; $display("reliability mask never blocked"); end
    if (n_cleanup == 0) begin failures++; $display("no clean-up correction of a reliable bit"); end
    if (n_stall   == 0) begin failures++; $display("output never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
