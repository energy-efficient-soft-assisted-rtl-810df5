// tb_bch_comp: checks the root-count test: ok must be high exactly when the
// locator's degree is 1..3 and equals the number of marked positions.
module tb_bch_comp;
  import tb_bch_pkg::*;
  import pd_pkg::elp_t;

  localparam int N = 255;
  elp_t         elp;
  logic [N-1:0] err;
  logic         ok;
  int checks = 0, failures = 0;

  bch_comp #(.N(N)) dut (.elp(elp), .err(err), .ok(ok));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int deg, cnt;
    for (int t = 0; t < 2000; t++) begin
      elp = '0;
      elp.l0 = 8'($urandom_range(255, 1));
      deg = $urandom_range(3);
      if (deg >= 1) elp.l1 = 8'($urandom);
      if (deg >= 2) elp.l2 = 8'($urandom);
      if (deg == 3) elp.l3 = 8'($urandom_range(255, 1));
      if (deg == 2) elp.l2 = 8'($urandom_range(255, 1));
      if (deg == 1) elp.l1 = 8'($urandom_range(255, 1));
      err = '0;
      cnt = (t % 4 == 0) ? $urandom_range(200) : $urandom_range(4);
      while ($countones(err) < cnt) err[$urandom_range(N - 1)] = 1'b1;
      #1;
      checks++;
      if (ok != (deg != 0 && cnt == deg)) begin
        failures++; $display("deg %0d count %0d ok %b", deg, cnt, ok);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
