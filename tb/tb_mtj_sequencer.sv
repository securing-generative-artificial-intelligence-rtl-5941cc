// tb_mtj_sequencer: runs the reset-perturb-sample controller against models of
// the DAC, the MTJ cells and the ADC.
//
// Checks: the per-MTJ perturb codes land in the DAC input registers (also after
// a reload with new codes); every cycle has one reset and one perturb on the
// cells; each raw word equals the ADC samples of that cycle compared with the
// per-MTJ thresholds; the reset and perturb pulses on the cells last
// RESET_HOLD+52 and PULSE_HOLD+52 clocks; words come exactly CYCLE_CLKS clocks apart (100 kHz at
// 100 MHz) with no overrun and no channel-tag error; cells driven far above or
// below their 50 % point give constant bits and the cells at their 50 % point
// give between 35 % and 65 % ones.
module tb_mtj_sequencer;
  import mtj_trng_pkg::*;

  localparam int CYCLE = 1000;
  localparam int NCYC  = 300;
  // hold + one 24-bit DAC frame at SCLK = clk/2 (48) + CS gap (2) + 2 handover clocks
  localparam int RESET_W = 40 + 52, PERTURB_W = 150 + 52;

  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, reload = 1'b0;
  always #5 clk = ~clk;

  dac_code_t [N_MTJ-1:0] perturb_code;
  adc_code_t [N_MTJ-1:0] vth;
  dac_code_t             reset_code = -16'sd12000, read_code = 16'sd1000;
  logic dac_sclk, dac_mosi, dac_cs_n, adc_sclk, adc_mosi, adc_miso, adc_cs_n;
  logic raw_valid, running;
  logic [N_MTJ-1:0] raw_word;
  logic [15:0] overrun_count, id_error_count;

  mtj_sequencer dut (.*);

  dac_code_t [N_MTJ-1:0] vdd, input_reg;
  adc_code_t [N_MTJ-1:0] vout, last_sample;
  logic      [N_MTJ-1:0] state;
  int dac_frames, dac_bad, n_upd, n_wall, n_resets, n_perturbs, adc_frames, adc_bad;

  dac_model u_dac (.sclk(dac_sclk), .mosi(dac_mosi), .cs_n(dac_cs_n), .vout(vdd), .input_reg,
                   .n_frames(dac_frames), .n_bad_frames(dac_bad), .n_update_all(n_upd), .n_write_all(n_wall));
  mtj_cell_model u_mtj (.vdd, .vout, .state, .n_resets, .n_perturbs);
  adc_model u_adc (.sclk(adc_sclk), .mosi(adc_mosi), .miso(adc_miso), .cs_n(adc_cs_n), .vin(vout),
                   .last_sample, .n_frames(adc_frames), .n_bad_frames(adc_bad));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (CYCLE * (NCYC + 40)) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int words = 0, ones[N_MTJ], bad0;
  longint last_t = -1, t = 0;
  logic [N_MTJ-1:0] expect_w;
  always @(posedge clk) t++;

  // pulse widths on the cells: reset from the reset-level update to the
  // update-all, perturb from the update-all to the read-level update
  longint t_reset = -1, t_pert = -1, w_reset = -1, w_pert = -1;
  int n_wall_prev = 0, n_upd_prev = 0;
  always @(vdd) begin
    if (n_upd != n_upd_prev) begin
      t_pert = t;
      if (t_reset >= 0) w_reset = t - t_reset;
    end else if (n_wall != n_wall_prev) begin
      if (vdd[0] == reset_code) t_reset = t;
      else if (t_pert >= 0) w_pert = t - t_pert;
    end
    n_upd_prev = n_upd;
    n_wall_prev = n_wall;
  end

  always @(posedge clk) if (raw_valid) begin
    for (int i = 0; i < N_MTJ; i++) expect_w[i] = (last_sample[i] > vth[i]);
    check(raw_word == expect_w, $sformatf("word %0d: got %h expected %h", words, raw_word, expect_w));
    check(raw_word == state || (vth != {N_MTJ{12'd2000}}), "bits match the cell states");
    if (last_t >= 0) check(t - last_t == CYCLE, $sformatf("word spacing %0d", t - last_t));
    last_t = t;
    for (int i = 0; i < N_MTJ; i++) ones[i] += raw_word[i];
    words++;
    check(n_resets == words && n_perturbs == words, "one reset and one perturb per word");
  end

  initial begin
    for (int i = 0; i < N_MTJ; i++) begin
      perturb_code[i] = dac_code_t'(10000 + i*500);   // 50 % point of each cell
      vth[i]          = 12'd2000;
      ones[i]         = 0;
    end
    perturb_code[0] = 16'sd20000;  // always switches
    perturb_code[1] = 16'sd6000;   // never switches
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    bad0 = dac_bad + adc_bad;
    @(posedge clk);
    enable = 1'b1;
    wait (running);
    check(input_reg == perturb_code, "perturb codes preloaded into the DAC");
    wait (words == NCYC / 2);
    // new perturb codes, reload while running
    @(posedge clk);
    perturb_code[0] = 16'sd6000;
    perturb_code[1] = 16'sd20000;
    @(posedge clk iff raw_valid);   // controller now waits for the next cycle
    reload <= 1'b1;
    @(posedge clk) reload <= 1'b0;
    last_t = -1;
    @(posedge clk iff raw_valid);
    check(input_reg == perturb_code, "perturb codes reloaded into the DAC");
    last_t = -1;
    wait (words == NCYC);
    @(posedge clk);
    $display("reset pulse %0d clocks, perturb pulse %0d clocks", w_reset, w_pert);
    check(w_reset == RESET_W && w_pert == PERTURB_W, $sformatf("pulse widths %0d %0d", w_reset, w_pert));
    check(overrun_count == 0, "no overrun");
    check(id_error_count == 0, "no channel-tag error");
    check(dac_bad + adc_bad == bad0, "well-formed SPI frames");
    check(n_upd == words && n_wall == 2 * words, "three DAC frames per cycle");
    check(ones[0] == NCYC/2 + 0 || ones[0] == NCYC/2 || ones[0] == NCYC/2 + 1, $sformatf("cell 1 ones %0d", ones[0]));
    check(ones[1] >= NCYC/2 - 2 && ones[1] <= NCYC/2, $sformatf("cell 2 ones %0d", ones[1]));
    for (int i = 2; i < N_MTJ; i++)
      check(ones[i] > NCYC*35/100 && ones[i] < NCYC*65/100, $sformatf("cell %0d ones %0d", i+1, ones[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
