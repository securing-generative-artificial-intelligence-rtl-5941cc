// tb_workload_latent_batch: a scaled-down run of the two workloads the
// generator is meant for, random-bit quality and latent codes for image
// generation, on cells that are deliberately trimmed off their 50 % point.
//
// Every model cell is driven at its 55 % point (raw bias 0.05). For each
// scheme (raw, XOR of three, Toeplitz) the generator runs 1,500 cycles
// (24,000 raw bits) with the output always ready, at the top's default
// parameters. The class index steps 0..9 from one latent code to the next,
// like a batch with one image per class.
// Checks per scheme:
//   - the monobit frequency statistic s = |#ones - #zeros| / sqrt(n) of the
//     post-processed bits: raw must fail clearly (s > 8) because of the bias,
//     XOR and Toeplitz must pass with margin (s < 4, i.e. p > 6e-5);
//   - the XOR scheme cuts the measured bias to under a third of raw;
//   - every latent value is in [-1, 1]; for XOR and Toeplitz the mean of the
//     random values is within 5 standard errors of 0;
//   - every code's class part is one-hot at the class index of that code;
//   - a 16-bin histogram of the 32-bit words (by their top four bits), the
//     scaled-down form of the published word histograms: for XOR and Toeplitz
//     its chi-square (15 degrees of freedom) must stay below 44.3 (p = 1e-4);
//   - the runs test on the same bits (each word MSB first, words in order):
//     for XOR and Toeplitz |V - 2n.pi.(1-pi)| / (2.sqrt(2n).pi.(1-pi)) < 4,
//     with V the number of runs and pi the ones fraction.
module tb_workload_latent_batch;
  import mtj_trng_pkg::*;

  localparam int CYCLES = 1500;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic enable = 0, reload = 0, lat_ready = 1, prob_start = 0;
  dac_code_t [N_MTJ-1:0] perturb_code;
  adc_code_t [N_MTJ-1:0] vth;
  dac_code_t reset_code = -16'sd12000, read_code = 16'sd1000;
  pp_mode_e  pp_mode = PP_RAW;
  logic [382:0] toeplitz_seed;
  logic [3:0] class_idx = '0;
  logic dac_sclk, dac_mosi, dac_cs_n, adc_sclk, adc_mosi, adc_miso, adc_cs_n;
  logic raw_valid, lat_valid, lat_last, running, rnd_valid, prob_busy, prob_done;
  logic [N_MTJ-1:0] raw_word;
  logic [31:0] lat_data, rnd_word;
  logic [7:0]  lat_index;
  logic [15:0] overrun_count, id_error_count, overflow_count;
  logic [10:0] fifo_level;
  logic [N_MTJ-1:0][9:0] prob_count;

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
    repeat (1000 * (3 * CYCLES + 3000)) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fp32_val(logic [31:0] f);
    real v;
    int  e;
    if (f[30:0] == 0) return 0.0;
    v = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    while (e > 0) begin v = v * 2.0; e--; end
    while (e < 0) begin v = v / 2.0; e++; end
    return f[31] ? -v : v;
  endfunction

  // per-phase statistics
  longint n_bits, n_ones;
  int     hist [16];
  longint n_runs;
  bit     last_bit, have_bit;
  int     n_vals, n_codes, n_hot;
  real    sum_v;
  bit     in_range;
  always @(posedge clk) if (rst_n) begin
    if (rnd_valid) begin
      n_bits += 32;
      n_ones += $countones(rnd_word);
      hist[rnd_word[31:28]]++;
      for (int b = 31; b >= 0; b--) begin
        if (!have_bit || rnd_word[b] != last_bit) n_runs++;
        last_bit = rnd_word[b];
        have_bit = 1;
      end
    end
    if (lat_valid && lat_ready) begin
      if (lat_index < 100) begin
        real v;
        v = fp32_val(lat_data);
        sum_v += v;
        n_vals++;
        if (v < -1.0 || v > 1.0) in_range = 0;
      end else begin
        if (lat_data == 32'h3F80_0000) begin
          n_hot++;
          check(int'(lat_index) - 100 == int'(class_idx), $sformatf("hot class %0d, code class %0d", int'(lat_index) - 100, class_idx));
        end else check(lat_data == 32'h0, "class value is 0.0 or 1.0");
      end
      if (lat_last) begin
        n_codes++;
        check(n_hot == 1, "one-hot class code");
        n_hot = 0;
        class_idx <= (class_idx == 4'd9) ? 4'd0 : class_idx + 4'd1;
      end
    end
  end

  real bias_raw;

  task automatic run_scheme(pp_mode_e mode);
    real s, bias, mean, se, chi2, e, pi, z;
    string hs;
    @(negedge clk) pp_mode = mode;
    repeat (2) @(negedge clk);
    foreach (hist[i]) hist[i] = 0;
    n_runs = 0; have_bit = 0;
    n_bits = 0; n_ones = 0; n_vals = 0; n_codes = 0; n_hot = 0; sum_v = 0.0; in_range = 1;
    class_idx = '0;
    enable = 1;
    repeat (CYCLES) @(posedge clk iff raw_valid);
    @(negedge clk) enable = 0;
    wait (!running);
    repeat (1000) @(negedge clk);
    s    = (n_ones * 2 > n_bits ? real'(n_ones * 2 - n_bits) : real'(n_bits - n_ones * 2)) / $sqrt(real'(n_bits));
    bias = real'(n_ones) / real'(n_bits) - 0.5;
    mean = sum_v / n_vals;
    se   = 0.57735 / $sqrt(real'(n_vals));
    e    = real'(n_bits / 32) / 16.0;
    chi2 = 0.0;
    hs   = "";
    foreach (hist[i]) begin
      chi2 += (real'(hist[i]) - e) * (real'(hist[i]) - e) / e;
      hs = {hs, $sformatf(" %0d", hist[i])};
    end
    pi = real'(n_ones) / real'(n_bits);
    z  = (real'(n_runs) - 2.0 * n_bits * pi * (1.0 - pi)) / (2.0 * $sqrt(2.0 * n_bits) * pi * (1.0 - pi));
    if (z < 0) z = -z;
    $display("%s: %0d runs, runs statistic %f", mode.name(), n_runs, z);
    $display("%s: word histogram (16 bins):%s, chi-square %f", mode.name(), hs, chi2);
    $display("%s: %0d bits, ones fraction %f, frequency statistic %f, %0d latent codes, %0d values, mean %f",
             mode.name(), n_bits, real'(n_ones) / real'(n_bits), s, n_codes, n_vals, mean);
    check(in_range, "values in [-1, 1]");
    check(n_codes >= 2, $sformatf("%s: %0d codes", mode.name(), n_codes));
    if (mode == PP_RAW) begin
      check(s > 8.0, $sformatf("raw bits fail the frequency test: s = %f", s));
      bias_raw = bias;
    end else begin
      check(s < 4.0, $sformatf("%s bits pass the frequency test: s = %f", mode.name(), s));
      check(z < 4.0, $sformatf("%s runs statistic %f", mode.name(), z));
      check(chi2 < 44.3, $sformatf("%s histogram chi-square %f", mode.name(), chi2));
      check(mean < 5 * se && mean > -5 * se, $sformatf("%s mean %f", mode.name(), mean));
      if (mode == PP_XOR) check((bias < 0 ? -bias : bias) < bias_raw / 3, $sformatf("XOR bias %f raw %f", bias, bias_raw));
    end
    // expected number of 32-bit words for the scheme's rate
    case (mode)
      PP_RAW:      check(n_bits == longint'(CYCLES * 16), $sformatf("raw bits %0d", n_bits));
      PP_XOR:      check(n_bits == longint'(CYCLES / 3 * 16 / 32 * 32), $sformatf("XOR bits %0d", n_bits));
      default:     check(n_bits == longint'(CYCLES / 16 * 128), $sformatf("Toeplitz bits %0d", n_bits));
    endcase
  endtask

  initial begin
    for (int i = 0; i < N_MTJ; i++) begin
      perturb_code[i] = dac_code_t'(10000 + i*500 + 200);  // 55 % point of each model cell
      vth[i]          = 12'd2000;
    end
    for (int i = 0; i < 383; i++) toeplitz_seed[i] = 1'($urandom);
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_scheme(PP_RAW);
    run_scheme(PP_XOR);
    run_scheme(PP_TOEPLITZ);
    check(overflow_count == 0 && overrun_count == 0 && id_error_count == 0, "no overflow, overrun or tag error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
