// tb_decoder_ctrl: checks the sequencer's schedule cycle by cycle for
// every iteration count from 1 to 10: one load, then per half-iteration the
// three strobes in order, rows before columns, iBDD-SR on all but the last
// two iterations, out_valid exactly 6*I + 1 cycles after the load edge,
// held under back-pressure, and the next load possible 6*I + 2 cycles after
// the previous one.
module tb_decoder_ctrl;
  localparam int ITER_W = 4;
  logic              clk = 1'b0;
  logic              rst_n, in_valid, in_ready, out_valid, out_ready;
  logic [ITER_W-1:0] cfg_iters;
  logic              load, cap_syn, cap_elp, wr_corr, col_mode, sr_mode;
  logic [ITER_W-1:0] iter;
  int checks = 0, failures = 0;

  decoder_ctrl #(.ITER_W(ITER_W), .HD_ITERS(2)) dut (.*);

  always #5 clk = !clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin failures++; $display("%s: got %0d want %0d", what, got, want); end
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; out_ready = 1'b1; cfg_iters = 5;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int I = 1; I <= 10; I++) begin
      int stall;
      stall = (I % 3 == 0) ? 4 : 0;
      cfg_iters = ITER_W'(I);
      in_valid = 1'b1;
      #1;
      expect_eq("in_ready idle", int'(in_ready), 1);
      expect_eq("load", int'(load), 1);
      @(posedge clk); #1;
      in_valid = 1'b0;
      cfg_iters = 4'd15;    // must have been sampled at load
      out_ready = (stall == 0);
      for (int it = 0; it < I; it++)
        for (int h = 0; h < 2; h++)
          for (int p = 0; p < 3; p++) begin
            expect_eq("in_ready busy", int'(in_ready), 0);
            expect_eq("cap_syn", int'(cap_syn), int'(p == 0));
            expect_eq("cap_elp", int'(cap_elp), int'(p == 1));
            expect_eq("wr_corr", int'(wr_corr), int'(p == 2));
            expect_eq("col_mode", int'(col_mode), h);
            expect_eq("sr_mode", int'(sr_mode), int'(it + 2 < I));
            expect_eq("iter", int'(iter), it);
            expect_eq("out_valid early", int'(out_valid), 0);
            @(posedge clk); #1;
          end
      expect_eq("out_valid", int'(out_valid), 1);
      expect_eq("no strobe when done", int'(cap_syn | cap_elp | wr_corr), 0);
      repeat (stall) begin
        @(posedge clk); #1;
        expect_eq("out_valid held", int'(out_valid), 1);
      end
      out_ready = 1'b1;
      @(posedge clk); #1;
      expect_eq("idle after output", int'(in_ready), 1);
      expect_eq("out_valid cleared", int'(out_valid), 0);
    end
    // zero iterations requested acts as one
    cfg_iters = 0; in_valid = 1'b1;
    @(posedge clk); #1 in_valid = 1'b0;
    repeat (6) @(posedge clk);
    #1 expect_eq("cfg 0 runs one iteration", int'(out_valid), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
