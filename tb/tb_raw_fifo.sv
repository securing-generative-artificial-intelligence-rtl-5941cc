// tb_raw_fifo: random writes and random read stalls against a queue model,
// then a long stall to force overflow. Checks order and contents of every word
// read, the level, that a full store drops exactly the surplus words and
// counts them, and that a word written is readable on the next clock.
module tb_raw_fifo;
  localparam int DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid, out_ready = 0;
  logic [15:0] in_data = '0, out_data;
  logic [4:0]  level;
  logic [15:0] overflow_count;
  raw_fifo #(.WIDTH(16), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] q[$];
  int dropped = 0;
  always @(posedge clk) if (rst_n) begin
    int n_before;
    n_before = q.size();
    if (out_valid && out_ready) begin
      check(q.size() > 0 && out_data == q[0], $sformatf("read %h expected %h", out_data, q.size() ? q[0] : 16'h0));
      if (q.size()) void'(q.pop_front());
    end
    if (in_valid) begin
      if (n_before < DEPTH) q.push_back(in_data);
      else dropped++;
    end
    check(32'(level) == n_before, "level");
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one word, readable next clock
    @(negedge clk) begin in_valid = 1; in_data = 16'hBEEF; end
    @(negedge clk) begin in_valid = 0; end
    check(out_valid && out_data == 16'hBEEF && level == 1, "word visible one clock after write");
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) == 0;
      in_data   = 16'($urandom);
      out_ready = ($urandom % 2) == 0;
    end
    // stall the reader and overfill
    @(negedge clk) out_ready = 0;
    for (int k = 0; k < DEPTH + 10; k++) begin
      @(negedge clk);
      in_valid = 1; in_data = 16'($urandom);
    end
    @(negedge clk) in_valid = 0;
    check(level == DEPTH, $sformatf("full level %0d", level));
    check(overflow_count == 16'(dropped) && dropped >= 10, $sformatf("overflow %0d dropped %0d", overflow_count, dropped));
    @(negedge clk) out_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    check(level == 0 && !out_valid && q.size() == 0, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
