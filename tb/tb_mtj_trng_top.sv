// tb_mtj_trng_top: the whole generator, at its default sizes, driving models
// of the DAC, the 16 MTJ cells and the ADC, from raw bits to latent codes.
//
// Phases:
//   1. raw scheme, class 3: two full latent codes; the output is stalled at
//      random; the perturb codes are reloaded once while running;
//   2. XOR scheme, class 7: one full latent code;
//   3. Toeplitz scheme, class 9: one full latent code;
//   4. raw scheme with the output held off until the raw store overflows,
//      measuring every cell's switching probability over the first 1,000
//      cycles (cells at their 50 % point must give 350-650 ones, cell 1,
//      reloaded far below its 50 % point, none).
// Before each scheme change the generator is disabled and the store drained,
// and the change itself flushes partly built words. Every value that comes out
// in phases 1-3 is compared with a reference computed here from the raw words
// seen on the raw tap: the scheme (none, XOR of three words, or the Toeplitz
// product), 32-bit packing and the float conversion, then the one-hot class
// code. Also checked: words 1000 clocks apart (100 kHz at 100 MHz), out_index
// and out_last, the post-processed word tap, overflow counted exactly, no overrun or channel-tag error.
// Each mechanism (three schemes, scheme change, stall, reload, overflow,
// probability window) is
// counted and must occur.
module tb_mtj_trng_top;
  import mtj_trng_pkg::*;

  localparam int CYCLE = 1000, DEPTH = 1024, TN_IN = 256, TN_OUT = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic enable = 0, reload = 0, lat_ready = 0;
  dac_code_t [N_MTJ-1:0] perturb_code;
  adc_code_t [N_MTJ-1:0] vth;
  dac_code_t reset_code = -16'sd12000, read_code = 16'sd1000;
  pp_mode_e  pp_mode = PP_RAW;
  logic [TN_IN+TN_OUT-2:0] toeplitz_seed;
  logic [3:0] class_idx = 4'd3;
  logic dac_sclk, dac_mosi, dac_cs_n, adc_sclk, adc_mosi, adc_miso, adc_cs_n;
  logic raw_valid, lat_valid, lat_last, running;
  logic [N_MTJ-1:0] raw_word;
  logic [31:0] lat_data, rnd_word;
  logic rnd_valid;
  logic prob_start = 0, prob_busy, prob_done;
  logic [N_MTJ-1:0][9:0] prob_count;
  int n_prob = 0;
  logic [7:0]  lat_index;
  logic [15:0] overrun_count, id_error_count, overflow_count;
  logic [10:0] fifo_level;

  mtj_trng_top dut (.*);

  dac_code_t [N_MTJ-1:0] vdd, input_reg;
  adc_code_t [N_MTJ-1:0] vout, last_sample;
  logic      [N_MTJ-1:0] cell_state;
  int d_frames, d_bad, d_upd, d_wall, n_resets, n_perturbs, a_frames, a_bad;
  dac_model u_dac (.sclk(dac_sclk), .mosi(dac_mosi), .cs_n(dac_cs_n), .vout(vdd), .input_reg,
                   .n_frames(d_frames), .n_bad_frames(d_bad), .n_update_all(d_upd), .n_write_all(d_wall));
  mtj_cell_model u_mtj (.vdd, .vout, .state(cell_state), .n_resets, .n_perturbs);
  adc_model u_adc (.sclk(adc_sclk), .mosi(adc_mosi), .miso(adc_miso), .cs_n(adc_cs_n), .vin(vout),
                   .last_sample, .n_frames(a_frames), .n_bad_frames(a_bad));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (CYCLE * 4000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
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
    m  = a * 8388608.0;
    mi = longint'($floor(m));
    fl = m - real'(mi);
    if (fl > 0.5 || (fl == 0.5 && mi[0])) mi++;
    if (mi == 64'd16777216) begin mi = 64'd8388608; e++; end
    return {s, 8'(e + 127), mi[22:0]};
  endfunction

  logic [15:0] raw_q[$];     // raw words of the current phase
  logic [31:0] exp_q[$];     // expected output values of the current phase
  logic [31:0] w32_last[$];  // expected post-processed 32-bit words

  // Build the expected values from the raw words seen so far.
  task automatic build_expected(pp_mode_e mode, logic [3:0] cls);
    logic [15:0] s16[$];
    logic [31:0] w32[$];
    exp_q.delete();
    if (mode == PP_XOR) begin
      for (int i = 0; i + 2 < raw_q.size(); i += 3) s16.push_back(raw_q[i] ^ raw_q[i+1] ^ raw_q[i+2]);
    end else if (mode == PP_TOEPLITZ) begin
      for (int b = 0; (b + 1) * (TN_IN / 16) <= raw_q.size(); b++) begin
        logic [TN_IN-1:0]  x;
        logic [TN_OUT-1:0] y;
        for (int j = 0; j < TN_IN; j++) x[j] = raw_q[b * (TN_IN / 16) + j / 16][15 - j % 16];
        for (int i = 0; i < TN_OUT; i++) begin
          y[i] = 1'b0;
          for (int j = 0; j < TN_IN; j++) y[i] ^= x[j] & toeplitz_seed[i - j + TN_IN - 1];
        end
        for (int r = 0; r < TN_OUT / 16; r++) begin
          logic [15:0] wd;
          for (int k = 0; k < 16; k++) wd[15 - k] = y[r * 16 + k];
          s16.push_back(wd);
        end
      end
    end else begin
      s16 = raw_q;
    end
    for (int i = 0; i + 1 < s16.size(); i += 2) w32.push_back({s16[i], s16[i+1]});
    w32_last = w32;
    for (int i = 0; i < w32.size(); i++) begin
      exp_q.push_back(to_fp32((real'(w32[i]) - 2147483648.0) / 2147483648.0));
      if (i % 100 == 99)
        for (int c = 0; c < 10; c++) exp_q.push_back((c == int'(cls)) ? 32'h3F80_0000 : 32'h0);
    end
  endtask

  // ---------------- monitors ----------------
  int n_out = 0, n_codes = 0, n_stall = 0, n_reload = 0, n_switch = 0, n_overflow_seen = 0;
  int codes_by_mode[3];
  int drops_expected = 0;
  bit checking = 1;
  longint t = 0, last_t = -1;
  logic [31:0] got_q[$], rnd_q[$];
  always @(posedge clk) t++;

  always @(posedge clk) if (rst_n) begin
    if (raw_valid) begin
      raw_q.push_back(raw_word);
      if (int'(fifo_level) == DEPTH) drops_expected++;
      if (last_t >= 0) check(t - last_t == CYCLE, $sformatf("raw word spacing %0d", t - last_t));
      last_t = t;
    end
    if (!enable) last_t = -1;
    if (lat_valid && !lat_ready) n_stall++;
    if (rnd_valid) rnd_q.push_back(rnd_word);
    if (lat_valid && lat_ready) begin
      check(int'(lat_index) == n_out % 110, $sformatf("index %0d expected %0d", lat_index, n_out % 110));
      check(lat_last == (n_out % 110 == 109), "last flag");
      got_q.push_back(lat_data);
      if (lat_last) begin
        n_codes++;
        codes_by_mode[pp_mode]++;
      end
      n_out++;
    end
  end

  // compare what came out in a phase with the reference
  task automatic finish_phase(pp_mode_e mode, logic [3:0] cls);
    build_expected(mode, cls);
    check(got_q.size() <= exp_q.size(), $sformatf("phase %s: %0d values out, %0d expected at most",
                                                  mode.name(), got_q.size(), exp_q.size()));
    for (int i = 0; i < got_q.size() && i < exp_q.size(); i++)
      check(got_q[i] == exp_q[i], $sformatf("phase %s value %0d: %h expected %h", mode.name(), i, got_q[i], exp_q[i]));
    check(rnd_q.size() <= w32_last.size() && rnd_q.size() > 0, "post-processed word tap count");
    for (int i = 0; i < rnd_q.size() && i < w32_last.size(); i++)
      check(rnd_q[i] == w32_last[i], $sformatf("phase %s word tap %0d: %h expected %h", mode.name(), i, rnd_q[i], w32_last[i]));
    got_q.delete();
    raw_q.delete();
    rnd_q.delete();
    n_out = 0;
  endtask

  task automatic run_phase(pp_mode_e mode, logic [3:0] cls, int codes, bit stall, bit do_reload);
    int target, did_reload;
    // switch scheme while idle and drained
    if (pp_mode != mode) n_switch++;
    @(negedge clk) begin pp_mode = mode; class_idx = cls; end
    repeat (2) @(negedge clk);
    target = n_codes + codes;
    did_reload = 0;
    enable = 1;
    while (n_codes < target) begin
      @(negedge clk);
      lat_ready = !stall || ($urandom % 4 != 0);
      if (do_reload && !did_reload && raw_q.size() == 40) begin
        // new perturb codes, taken in at the end of the current cycle
        perturb_code[0] = 16'sd6000;
        @(posedge clk iff raw_valid);
        @(negedge clk) reload = 1;
        @(negedge clk) reload = 0;
        did_reload = 1;
        n_reload++;
        last_t = -1;
      end
    end
    @(negedge clk) begin enable = 0; lat_ready = 0; end
    wait (!running);
    repeat (CYCLE) @(negedge clk);
    finish_phase(mode, cls);
  endtask

  initial begin
    for (int i = 0; i < N_MTJ; i++) begin
      perturb_code[i] = dac_code_t'(10000 + i*500);  // 50 % point of each model cell
      vth[i]          = 12'd2000;
    end
    for (int i = 0; i < TN_IN + TN_OUT - 1; i++) toeplitz_seed[i] = 1'($urandom);
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    run_phase(PP_RAW,      4'd3, 2, 1'b1, 1'b1);
    check(input_reg[0] == 16'sd6000, "reloaded perturb code in the DAC");
    run_phase(PP_XOR,      4'd7, 1, 1'b0, 1'b0);
    run_phase(PP_TOEPLITZ, 4'd9, 1, 1'b1, 1'b0);

    // overflow: output held off until the raw store is full
    @(negedge clk) pp_mode = PP_RAW;
    n_switch++;
    repeat (2) @(negedge clk);
    lat_ready = 0;
    // measure the switching probability over the first 1,000 cycles
    prob_start = 1;
    @(negedge clk) prob_start = 0;
    enable = 1;
    wait (prob_done);
    #1;
    n_prob++;
    begin
      int ref_cnt;
      for (int i = 0; i < N_MTJ; i++) begin
        ref_cnt = 0;
        for (int k = 0; k < 1000; k++) ref_cnt += raw_q[k][i];
        check(int'(prob_count[i]) == ref_cnt, $sformatf("cell %0d: %0d ones counted, %0d seen", i + 1, prob_count[i], ref_cnt));
        // cell 1 was reloaded far below its 50 % point and never switches
        if (i == 0) check(prob_count[i] == 0, $sformatf("cell 1 never switches: %0d", prob_count[i]));
        else check(prob_count[i] > 350 && prob_count[i] < 650, $sformatf("cell %0d near 50 %%: %0d", i + 1, prob_count[i]));
      end
    end
    wait (overflow_count >= 3);
    @(negedge clk) enable = 0;
    wait (!running);
    repeat (10) @(negedge clk);
    n_overflow_seen = int'(overflow_count);
    check(int'(fifo_level) == DEPTH, $sformatf("store full: level %0d", fifo_level));
    check(n_overflow_seen == drops_expected, $sformatf("overflow count %0d, words arriving at a full store %0d",
                                                        n_overflow_seen, drops_expected));

    check(overrun_count == 0, "no sequencer overrun");
    check(id_error_count == 0, "no ADC channel-tag error");
    check(codes_by_mode[PP_RAW] >= 2, "raw scheme produced codes");
    check(codes_by_mode[PP_XOR] >= 1, "XOR scheme produced codes");
    check(codes_by_mode[PP_TOEPLITZ] >= 1, "Toeplitz scheme produced codes");
    check(n_switch >= 3, "scheme changes");
    check(n_stall > 0, "output stalls");
    check(n_reload == 1, "reload");
    check(n_overflow_seen > 0, "overflow");
    check(n_prob == 1, "switching-probability measurement");
    $display("mechanisms: raw codes %0d, xor codes %0d, toeplitz codes %0d, scheme changes %0d, stall clocks %0d, reloads %0d, overflows %0d, probability windows %0d",
             codes_by_mode[PP_RAW], codes_by_mode[PP_XOR], codes_by_mode[PP_TOEPLITZ], n_switch, n_stall, n_reload, n_overflow_seen, n_prob);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
