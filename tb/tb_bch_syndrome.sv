// tb_bch_syndrome: checks the syndrome unit at full length (N = 255)
// against the log-table reference: random words, random product-code row
// codewords (zero syndrome expected) and codewords with 1..4 errors.
module tb_bch_syndrome;
  import tb_bch_pkg::*;
  import pd_pkg::syn_t;

  localparam int N = 255;
  logic [N-1:0] r;
  syn_t         syn;
  logic         zero;
  int checks = 0, failures = 0;

  bch_syndrome #(.N(N)) dut (.r(r), .syn(syn), .zero(zero));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(word_t w);
    int unsigned s1, s3, s5;
    r = w[N-1:0];
    #1;
    syndromes(w, N, s1, s3, s5);
    checks++;
    if (syn.s1 != s1[7:0] || syn.s3 != s3[7:0] || syn.s5 != s5[7:0] ||
        zero != (s1 == 0 && s3 == 0 && s5 == 0)) begin
      failures++;
      $display("mismatch: got %h %h %h z=%b, expected %h %h %h", syn.s1, syn.s3, syn.s5,
               zero, s1, s3, s5);
    end
  endtask

  initial begin
    word_t w, m;
    tb_init();
    for (int t = 0; t < 200; t++) begin
      for (int j = 0; j < 255; j += 32) w[j +: 32] = $urandom;
      check(w);
    end
    for (int t = 0; t < 100; t++) begin
      for (int j = 0; j < 255; j += 32) m[j +: 32] = $urandom;
      w = encode(m, N);
      check(w);
      checks++;
      if (!zero) begin failures++; $display("codeword not flagged zero"); end
      for (int e = 0; e <= t % 5; e++) w[$urandom_range(N - 1)] ^= 1'b1;
      check(w);
    end
    for (int j = 0; j < N; j++) begin
      w = '0; w[j] = 1'b1;
      check(w);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
