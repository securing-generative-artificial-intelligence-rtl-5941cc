// tb_switch_prob_monitor: random raw words with per-bit ones probabilities
// from 0 to 1, arriving at random intervals. Over each 1,000-word window the
// per-cell counts must equal the ones counted here; done must come with the
// 1,000th word; words outside a window must not be counted; a new start must
// clear the counts.
module tb_switch_prob_monitor;
  localparam int N = 16, NP = 1000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 0, raw_valid = 0, busy, done;
  logic [N-1:0] raw_word = '0;
  logic [N-1:0][9:0] count;
  switch_prob_monitor dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_cnt[N];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 3; w++) begin
      // a few words before the window, which must not count
      repeat (5) begin
        @(negedge clk) begin raw_valid = 1; raw_word = '1; end
        @(negedge clk) raw_valid = 0;
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      for (int i = 0; i < N; i++) ref_cnt[i] = 0;
      for (int k = 0; k < NP; k++) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) raw_word[i] = ($urandom % 1000) < (i * 1000 / (N - 1));
        raw_valid = 1;
        for (int i = 0; i < N; i++) ref_cnt[i] += raw_word[i];
        @(posedge clk);
        #1;
        check(done == (k == NP - 1), $sformatf("done at word %0d", k));
        @(negedge clk) raw_valid = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
      check(!busy, "window closed");
      // words after the window do not count
      @(negedge clk) begin raw_valid = 1; raw_word = '1; end
      @(negedge clk) raw_valid = 0;
      for (int i = 0; i < N; i++)
        check(int'(count[i]) == ref_cnt[i], $sformatf("cell %0d count %0d expected %0d", i + 1, count[i], ref_cnt[i]));
      check(count[0] == 0 && count[N-1] == NP, "cells at probability 0 and 1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
