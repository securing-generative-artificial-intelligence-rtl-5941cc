// tb_xor3_combiner: random words with random stalls on both sides. Every
// output word must be the XOR of the next three input words, in order; clr in
// the middle of a group must discard the partial group.
module tb_xor3_combiner;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = '0, out_data;
  xor3_combiner #(.W(16)) dut (.*);

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

  logic [15:0] inq[$], expq[$];
  int n_out = 0, n_in = 0;
  always @(posedge clk) if (rst_n && !clr) begin
    if (out_valid && out_ready) begin
      check(expq.size() > 0 && out_data == expq[0], $sformatf("out %h expected %h", out_data, expq.size() ? expq[0] : 16'h0));
      if (expq.size()) void'(expq.pop_front());
      n_out++;
    end
    if (in_valid && in_ready) begin
      inq.push_back(in_data);
      n_in++;
      if (inq.size() == 3) begin
        expq.push_back(inq[0] ^ inq[1] ^ inq[2]);
        inq.delete();
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      if (k == 1500) begin
        // clear after an odd number of words
        in_valid = 0; out_ready = 1;
        repeat (3) @(negedge clk);
        clr = 1; @(negedge clk); clr = 0;
        inq.delete(); expq.delete();
      end
      in_valid  = ($urandom % 2) == 0;
      in_data   = 16'($urandom);
      out_ready = ($urandom % 3) != 0;
    end
    @(negedge clk) begin in_valid = 0; out_ready = 1; end
    repeat (5) @(negedge clk);
    check(expq.size() == 0, "all outputs delivered");
    check(n_out > 400, $sformatf("outputs %0d", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
