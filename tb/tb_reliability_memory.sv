// tb_reliability_memory: checks that the reliability bits are taken only
// on load and that the permission is the stored bit in iBDD-SR mode and
// all ones otherwise, with N = 19.
module tb_reliability_memory;
  localparam int N = 19;
  logic         clk = 1'b0;
  logic         load, sr_mode;
  logic [N-1:0] weak_in [N];
  logic [N-1:0] allow   [N];
  logic [N-1:0] model   [N];
  int checks = 0, failures = 0;

  reliability_memory #(.N(N)) dut (.*);

  always #5 clk = !clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad;
    load = 1'b0; sr_mode = 1'b1;
    for (int t = 0; t < 200; t++) begin
      load = (t % 5 == 0);
      for (int i = 0; i < N; i++) weak_in[i] = N'($urandom);
      if (load) for (int i = 0; i < N; i++) model[i] = weak_in[i];
      @(posedge clk); #1;
      load = 1'b0;
      for (int i = 0; i < N; i++) weak_in[i] = N'($urandom);
      for (int m = 0; m < 2; m++) begin
        sr_mode = m[0];
        #1;
        bad = 0;
        for (int i = 0; i < N; i++) if (allow[i] != (sr_mode ? model[i] : '1)) bad++;
        checks++;
        if (bad != 0) begin failures++; $display("t=%0d sr=%b: %0d rows wrong", t, sr_mode, bad); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
