// tb_bch_kes: checks the closed-form key-equation solver. For random sets
// of 1, 2 and 3 error positions the syndromes are computed by the reference
// and the solver's locator must vanish at alpha^(-j) exactly for the error
// positions j. Syndromes that match no pattern of up to one error while
// D = S1^3 + S3 = 0 must give the root-free locator 1.
module tb_bch_kes;
  import tb_bch_pkg::*;
  import pd_pkg::syn_t;
  import pd_pkg::elp_t;

  syn_t syn;
  elp_t elp;
  int checks = 0, failures = 0;

  bch_kes dut (.syn(syn), .elp(elp));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned eval(elp_t p, int unsigned x);
    return p.l0 ^ mul(p.l1, x) ^ mul(p.l2, mul(x, x)) ^ mul(p.l3, mul(x, mul(x, x)));
  endfunction

  initial begin
    word_t w;
    int unsigned s1, s3, s5;
    int bad;
    tb_init();
    for (int t = 0; t < 600; t++) begin
      w = '0;
      while ($countones(w) < (t % 3) + 1) w[$urandom_range(254)] = 1'b1;
      syndromes(w, 255, s1, s3, s5);
      syn = '{s1: s1[7:0], s3: s3[7:0], s5: s5[7:0]};
      #1;
      bad = 0;
      for (int j = 0; j < 255; j++)
        if ((eval(elp, apow(255 - j)) == 0) != w[j]) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("%0d errors: %0d wrong roots", t % 3 + 1, bad); end
    end
    // D = 0 but not a single-error syndrome: S1 = 0, S3 = 0, S5 != 0
    for (int t = 1; t < 50; t++) begin
      syn = '{s1: 8'h00, s3: 8'h00, s5: 8'(t)};
      #1;
      checks++;
      if (elp != '{l0: 8'h01, l1: 8'h00, l2: 8'h00, l3: 8'h00}) begin
        failures++; $display("uncorrectable syndrome not mapped to 1");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
