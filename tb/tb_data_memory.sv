// tb_data_memory: checks loading, row-mode and column-mode correction
// routing and the per-bit reliability mask of the data memory against a
// plain array model, with N = 17.
module tb_data_memory;
  localparam int N = 17;
  logic         clk = 1'b0;
  logic         load, wr_corr, col_mode;
  logic [N-1:0] hd_in [N];
  logic [N-1:0] corr  [N];
  logic [N-1:0] allow [N];
  logic [N-1:0] mem   [N];
  logic [N-1:0] model [N];
  int checks = 0, failures = 0;

  data_memory #(.N(N)) dut (.*);

  always #5 clk = !clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    int bad = 0;
    for (int i = 0; i < N; i++) if (mem[i] != model[i]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("%s: %0d rows differ", what, bad); end
  endtask

  initial begin
    load = 1'b0; wr_corr = 1'b0; col_mode = 1'b0;
    for (int i = 0; i < N; i++) begin hd_in[i] = '0; corr[i] = '0; allow[i] = '0; end
    for (int t = 0; t < 300; t++) begin
      if (t % 20 == 0) begin
        for (int i = 0; i < N; i++) begin hd_in[i] = N'($urandom); model[i] = hd_in[i]; end
        #1 load = 1'b1;
        @(posedge clk); #1 load = 1'b0;
        compare("load");
      end
      col_mode = $urandom_range(1);
      for (int k = 0; k < N; k++) begin
        corr[k]  = N'($urandom) & N'($urandom);
        allow[k] = N'($urandom);
      end
      wr_corr = (t % 7 != 3);
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          if (wr_corr && allow[i][j] && (col_mode ? corr[j][i] : corr[i][j])) model[i][j] ^= 1'b1;
      @(posedge clk); #1;
      compare(wr_corr ? (col_mode ? "column correction" : "row correction") : "idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
