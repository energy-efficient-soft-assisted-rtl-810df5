// tb_component_decoder: checks one pipelined component decoder at N = 255.
// Row and column syndromes of two different random words are presented;
// after the two capture strobes corr must equal the reference
// bounded-distance decision for the selected word (zero when decoding
// fails or the syndrome is zero). It also checks that a zero syndrome
// gates the pipeline registers (they keep their old contents) and that a
// failure is reported as a veto.
module tb_component_decoder;
  import tb_bch_pkg::*;
  import pd_pkg::syn_t;

  localparam int N = 255;
  logic         clk = 1'b0;
  logic         rst_n;
  syn_t         syn_row, syn_col;
  logic         zero_row, zero_col, col_mode, cap_syn, cap_elp;
  logic [N-1:0] corr;
  logic         corr_valid, vetoed;
  int checks = 0, failures = 0;
  int n_zero = 0, n_fail = 0, n_ok = 0;

  component_decoder #(.N(N)) dut (.*);

  always #5 clk = !clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic syn_t syn_of(word_t w, output logic z);
    int unsigned s1, s3, s5;
    syndromes(w, N, s1, s3, s5);
    z = (s1 == 0 && s3 == 0 && s5 == 0);
    return '{s1: s1[7:0], s3: s3[7:0], s5: s5[7:0]};
  endfunction

  function automatic word_t noisy(int nerr);
    word_t m, w;
    for (int j = 0; j < 255; j += 32) m[j +: 32] = $urandom;
    w = encode(m, N);
    for (int e = 0; e < nerr; e++) w[$urandom_range(N - 1)] ^= 1'b1;
    return w;
  endfunction

  initial begin
    word_t wr, wc, w, e;
    int st;
    logic [N-1:0] corr_prev;
    logic         prev_valid;
    tb_init();
    rst_n = 1'b0; cap_syn = 1'b0; cap_elp = 1'b0; col_mode = 1'b0;
    syn_row = '0; syn_col = '0; zero_row = 1'b1; zero_col = 1'b1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++;
    if (corr_valid || corr != '0) begin failures++; $display("corr not idle after reset"); end
    for (int t = 0; t < 400; t++) begin
      wr = noisy($urandom_range(5));
      wc = noisy($urandom_range(5));
      syn_row  = syn_of(wr, zero_row);
      syn_col  = syn_of(wc, zero_col);
      col_mode = t[0];
      w = col_mode ? wc : wr;
      corr_prev  = corr;
      prev_valid = corr_valid;
      #1 cap_syn = 1'b1;
      @(posedge clk); #1 cap_syn = 1'b0; cap_elp = 1'b1;
      // inputs may change after the syndrome capture
      syn_row = '0; syn_col = '0;
      @(posedge clk); #1 cap_elp = 1'b0;
      bdd(w, N, e, st);
      checks++;
      if (corr != e[N-1:0] || corr_valid != (st == 1) || vetoed != (st == 2)) begin
        failures++;
        $display("t=%0d status %0d: corr_valid=%b vetoed=%b", t, st, corr_valid, vetoed);
      end
      if (st == 0) n_zero++; else if (st == 1) n_ok++; else n_fail++;
      // the output stays put until the next strobes
      @(posedge clk); #1;
      checks++;
      if (corr != e[N-1:0]) begin failures++; $display("corr not held"); end
    end
    // zero syndrome: stage registers are not written
    begin
      syn_t held;
      held = dut.syn_q;
      syn_row = '{s1: 8'h00, s3: 8'h00, s5: 8'h00}; zero_row = 1'b1; col_mode = 1'b0;
      #1 cap_syn = 1'b1;
      @(posedge clk); #1 cap_syn = 1'b0;
      checks++;
      if (dut.syn_q != held) begin failures++; $display("stage 1 clocked on zero syndrome"); end
    end
    checks++;
    if (n_zero == 0 || n_ok == 0 || n_fail == 0) begin
      failures++; $display("cases not all seen: %0d %0d %0d", n_zero, n_ok, n_fail);
    end
    $display("zero=%0d corrected=%0d failed=%0d", n_zero, n_ok, n_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
