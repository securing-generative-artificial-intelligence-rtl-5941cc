// tb_toeplitz_extractor: random seeds and random 256-bit blocks, hashed by the
// extractor and by a direct evaluation of y_i = XOR_j T[i][j] x_j with
// T[i][j] = s[i - j + N_IN - 1]. Also checks the rate: with input always
// valid and output always ready, a block of N_IN/W words plus its N_OUT/W
// output words takes (N_IN + N_OUT)/W clocks.
module tb_toeplitz_extractor;
  localparam int N_IN = 256, N_OUT = 128, W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [N_IN+N_OUT-2:0] seed;
  toeplitz_extractor #(.N_IN(N_IN), .N_OUT(N_OUT), .W(W)) dut (.*);

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

  logic [N_IN-1:0]  x;     // x[j] = x_j
  logic [N_OUT-1:0] y;     // y[i] = y_i

  task automatic hash_ref();
    for (int i = 0; i < N_OUT; i++) begin
      y[i] = 1'b0;
      for (int j = 0; j < N_IN; j++) y[i] ^= x[j] & seed[i - j + N_IN - 1];
    end
  endtask

  task automatic run_block(bit stall);
    logic [W-1:0] wd;
    int k, t0, r;
    for (int j = 0; j < N_IN; j++) x[j] = 1'($urandom);
    if ($urandom % 4 == 0) begin x = '0; x[$urandom % N_IN] = 1'b1; end  // single column
    hash_ref();
    t0 = $time / 10;
    k = 0; r = 0;
    while (r < N_OUT / W) begin
      @(negedge clk);
      // present the next word
      in_valid = (k < N_IN / W) && (!stall || $urandom % 2);
      for (int b = 0; b < W; b++) wd[W-1-b] = x[(k < N_IN/W ? k : 0) * W + b];
      in_data   = wd;
      out_ready = !stall || ($urandom % 2);
      @(posedge clk);
      if (in_valid && in_ready) k++;
      if (out_valid && out_ready) begin
        logic [W-1:0] e;
        for (int b = 0; b < W; b++) e[W-1-b] = y[r * W + b];
        check(out_data == e, $sformatf("out word %0d: %h expected %h", r, out_data, e));
        r++;
      end
    end
    if (!stall) check($time / 10 - t0 == (N_IN + N_OUT) / W,
                      $sformatf("block took %0d clocks", $time / 10 - t0));
    @(negedge clk) begin in_valid = 0; out_ready = 0; end
  endtask

  initial begin
    for (int i = 0; i < N_IN + N_OUT - 1; i++) seed[i] = 1'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      if (n % 10 == 0) for (int i = 0; i < N_IN + N_OUT - 1; i++) seed[i] = 1'($urandom);
      run_block(n % 2 == 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
