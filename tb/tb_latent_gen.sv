// tb_latent_gen: latent codes from random and chosen 32-bit words.
//
// Each random word w must become the single-precision value of
// (w - 2^31) / 2^31 rounded to nearest even, worked out here with real
// arithmetic; the published example word 3,937,735,687 must give 0.8337 to
// four places. Codes are 110 values: 100 from words, then a one-hot class
// code. With input always valid and output always ready a code streams out
// in 110 consecutive clocks (measured here as 112 clocks from the first word
// presented to the clock after the last value: one clock of latency, one of
// measurement). Also checks out_index, out_last, stalls and 3,200 bits per code.
module tb_latent_gen;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clr = 0, in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [3:0]  class_idx = '0;
  logic [31:0] in_data = '0, out_data;
  logic [7:0]  out_index;
  latent_gen dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: IEEE single from a real value that is exact in double
  function automatic logic [31:0] to_fp32(real v);
    logic s;
    int   e;
    real  a, m, fl;
    longint mi;
    if (v == 0.0) return 32'h0;
    s = v < 0.0;
    a = s ? -v : v;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m  = a * 8388608.0;          // 2^23, still exact
    mi = longint'($floor(m));
    fl = m - real'(mi);
    if (fl > 0.5 || (fl == 0.5 && mi[0])) mi++;
    if (mi == 64'd16777216) begin mi = 64'd8388608; e++; end
    return {s, 8'(e + 127), mi[22:0]};
  endfunction

  function automatic real fp32_val(logic [31:0] f);
    real v;
    int  e;
    v = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    while (e > 0) begin v = v * 2.0; e--; end
    while (e < 0) begin v = v / 2.0; e++; end
    return f[31] ? -v : v;
  endfunction

  function automatic real ref_val(logic [31:0] w);
    return (real'(w) - 2147483648.0) / 2147483648.0;
  endfunction

  logic [31:0] words[$];
  int n_out = 0, n_codes = 0, words_used = 0;
  logic [3:0] cls;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin words.push_back(in_data); words_used++; end
    if (out_valid && out_ready) begin
      int e;
      e = n_out % 110;
      check(out_index == 8'(e), $sformatf("index %0d expected %0d", out_index, e));
      check(out_last == (e == 109), "last flag");
      if (e < 100) begin
        logic [31:0] w;
        w = words.pop_front();
        check(out_data == to_fp32(ref_val(w)),
              $sformatf("w=%0d got %h expected %h", w, out_data, to_fp32(ref_val(w))));
        if (w == 32'd3937735687) begin
          real d;
          d = fp32_val(out_data) - 0.8337;
          check(d < 0.00005 && d > -0.00005, "published example 0.8337");
        end
      end else begin
        check(out_data == ((e - 100 == int'(cls)) ? 32'h3F80_0000 : 32'h0), $sformatf("class value %0d", e));
      end
      if (e == 109) n_codes++;
      n_out++;
    end
  end

  task automatic run_code(bit stall);
    int k, base;
    int t0, target;
    k = 0;
    base = words_used;
    t0 = $time / 10;
    target = n_codes + 1;
    while (n_codes < target) begin
      @(negedge clk);
      in_valid = (k < 100) && (!stall || $urandom % 2);
      case (k)
        0: in_data = 32'd3937735687;
        1: in_data = 32'd0;
        2: in_data = 32'hFFFF_FFFF;
        3: in_data = 32'h8000_0000;
        4: in_data = 32'h8000_0001;
        5: in_data = 32'h7FFF_FF7F;
        default: in_data = $urandom;
      endcase
      out_ready = !stall || $urandom % 3 != 0;
      @(posedge clk);
      #1;
      k = words_used - base;
    end
    @(negedge clk) begin in_valid = 0; out_ready = 0; end
    if (!stall) check($time / 10 - t0 == 112, $sformatf("code took %0d clocks", $time / 10 - t0));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      class_idx = 4'(n % 10);
      cls = class_idx;
      run_code(n % 2 == 1);
    end
    check(n_codes == 20, "20 codes");
    check(words_used * 32 == 20 * 3200, "3,200 random bits per code");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
