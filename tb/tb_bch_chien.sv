// tb_bch_chien: checks the parallel Chien search at N = 255. Locators are
// built from chosen root sets, Lambda(x) = c (1 + X1 x)(1 + X2 x)(1 + X3 x),
// and also drawn at random; the error vector must mark exactly the
// positions where a Horner evaluation of Lambda at alpha^(-j) is zero.
module tb_bch_chien;
  import tb_bch_pkg::*;
  import pd_pkg::elp_t;

  localparam int N = 255;
  elp_t         elp;
  logic [N-1:0] err;
  int checks = 0, failures = 0;

  bch_chien #(.N(N)) dut (.elp(elp), .err(err));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(elp_t p);
    word_t expv;
    int unsigned x;
    elp = p;
    #1;
    expv = '0;
    for (int j = 0; j < N; j++) begin
      x = apow(255 - j);
      expv[j] = ((mul(mul(mul(p.l3, x) ^ p.l2, x) ^ p.l1, x) ^ p.l0) == 0);
    end
    checks++;
    if (err != expv[N-1:0]) begin failures++; $display("root mismatch for %h", p); end
  endtask

  initial begin
    int unsigned c, a, b, d, p0, p1, p2, p3;
    word_t pos;
    elp_t  p;
    tb_init();
    for (int t = 0; t < 300; t++) begin
      pos = '0;
      while ($countones(pos) < 3) pos[$urandom_range(254)] = 1'b1;
      a = 0; b = 0; d = 0;
      for (int j = 0; j < 255; j++) if (pos[j]) begin
        if (a == 0) a = apow(j); else if (b == 0) b = apow(j); else d = apow(j);
      end
      c = $urandom_range(255, 1);
      // expand c (1 + a x)(1 + b x)(1 + d x)
      p0 = c;
      p1 = mul(c, a ^ b ^ d);
      p2 = mul(c, mul(a, b) ^ mul(a, d) ^ mul(b, d));
      p3 = mul(c, mul(mul(a, b), d));
      p = '{l0: p0[7:0], l1: p1[7:0], l2: p2[7:0], l3: p3[7:0]};
      check(p);
      checks++;
      if (err != pos[N-1:0]) begin failures++; $display("roots not at chosen positions"); end
    end
    for (int t = 0; t < 300; t++) begin
      p = elp_t'($urandom);
      check(p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
