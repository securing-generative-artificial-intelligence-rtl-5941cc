// mtj_trng_top: FPGA side of a 16-MTJ true random number generator that feeds
// latent codes to a generative model.
//
// Data path, as in the published prototype:
//   MTJ array (off chip, via 16-ch DAC and 16-ch ADC on two SPI buses)
//     -> mtj_sequencer: reset-perturb-sample cycle, 16 raw bits per cycle
//     -> raw_fifo: raw words stored in the FPGA (dropped and counted when full)
//     -> post-processing selected by pp_mode: raw, XOR of three raw words
//        (xor3_combiner) or Toeplitz hashing (toeplitz_extractor)
//     -> word_packer: 32-bit words
//     -> latent_gen: 100 single-precision numbers in [-1, 1] + 10 class numbers
//        per latent code, streamed out on lat_*.
// Beside the chain, switch_prob_monitor counts each cell's ones over 1,000
// cycles on request (prob_*), for trimming the perturb amplitudes to 50 %.
// The raw words are visible on raw_valid/raw_word and the post-processed
// 32-bit words on rnd_valid/rnd_word (one clock pulse per word the latent-code
// generator takes), so that either bit sequence can be recorded for
// statistical testing.
//
// Changing pp_mode flushes every partly built word in the post-processing
// chain and the latent code being built, so a latent code never mixes two
// schemes; stored raw words in raw_fifo are kept. The configuration inputs
// (per-MTJ perturb codes and thresholds, reset and read levels) are static
// while enable is high, except that a reload pulse rewrites the perturb codes
// into the DAC. Parameter defaults follow the published system where it gives
// a number (16 MTJs, 100 kHz cycle, 32-bit words, 110-value latent codes); the
// clock (100 MHz), pulse timing, buffer depth and Toeplitz size are this
// design's.
module mtj_trng_top
  import mtj_trng_pkg::*;
#(
  parameter int unsigned CYCLE_CLKS  = 1000,
  parameter int unsigned RESET_HOLD  = 40,
  parameter int unsigned PULSE_HOLD  = 150,
  parameter int unsigned FIFO_DEPTH  = 1024,
  parameter int unsigned TOEP_N_IN   = 256,
  parameter int unsigned TOEP_N_OUT  = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          enable,
  input  logic                          reload,
  input  dac_code_t [N_MTJ-1:0]         perturb_code,
  input  adc_code_t [N_MTJ-1:0]         vth,
  input  dac_code_t                     reset_code,
  input  dac_code_t                     read_code,
  input  pp_mode_e                      pp_mode,
  input  logic [TOEP_N_IN+TOEP_N_OUT-2:0] toeplitz_seed,
  input  logic [3:0]                    class_idx,
  // DAC SPI
  output logic                          dac_sclk,
  output logic                          dac_mosi,
  output logic                          dac_cs_n,
  // ADC SPI
  output logic                          adc_sclk,
  output logic                          adc_mosi,
  input  logic                          adc_miso,
  output logic                          adc_cs_n,
  // raw word tap
  output logic                          raw_valid,
  output logic [N_MTJ-1:0]              raw_word,
  // post-processed 32-bit words, as taken by the latent-code generator
  output logic                          rnd_valid,
  output logic [31:0]                   rnd_word,
  // latent code stream
  output logic                          lat_valid,
  input  logic                          lat_ready,
  output logic [31:0]                   lat_data,
  output logic [7:0]                    lat_index,
  output logic                          lat_last,
  // switching-probability measurement (ones per MTJ over 1,000 cycles)
  input  logic                          prob_start,
  output logic                          prob_busy,
  output logic                          prob_done,
  output logic [N_MTJ-1:0][9:0]         prob_count,
  // status
  output logic                          running,
  output logic [15:0]                   overrun_count,
  output logic [15:0]                   id_error_count,
  output logic [15:0]                   overflow_count,
  output logic [$clog2(FIFO_DEPTH):0]   fifo_level
);
  // mode change -> flush the post-processing chain
  pp_mode_e mode_q;
  logic     flush;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mode_q <= PP_RAW;
    else        mode_q <= pp_mode;
  end
  assign flush = (mode_q != pp_mode);

  mtj_sequencer #(
    .CYCLE_CLKS(CYCLE_CLKS), .RESET_HOLD(RESET_HOLD), .PULSE_HOLD(PULSE_HOLD)
  ) u_seq (
    .clk, .rst_n, .enable, .reload, .perturb_code, .vth, .reset_code, .read_code,
    .dac_sclk, .dac_mosi, .dac_cs_n, .adc_sclk, .adc_mosi, .adc_miso, .adc_cs_n,
    .raw_valid, .raw_word, .running, .overrun_count, .id_error_count);

  switch_prob_monitor #(.N(N_MTJ), .N_PULSES(1000)) u_prob (
    .clk, .rst_n, .start(prob_start), .raw_valid, .raw_word,
    .busy(prob_busy), .done(prob_done), .count(prob_count));

  logic              f_valid, f_ready;
  logic [N_MTJ-1:0]  f_data;
  raw_fifo #(.WIDTH(N_MTJ), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid(raw_valid), .in_data(raw_word),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data),
    .level(fifo_level), .overflow_count);

  // route the stored raw words to the selected scheme
  logic             x_in_ready, x_valid, x_ready;
  logic [N_MTJ-1:0] x_data;
  logic             t_in_ready, t_valid, t_ready;
  logic [N_MTJ-1:0] t_data;
  logic             p_in_valid, p_in_ready;
  logic [N_MTJ-1:0] p_in_data;

  xor3_combiner #(.W(N_MTJ)) u_xor (
    .clk, .rst_n, .clr(flush),
    .in_valid(f_valid && pp_mode == PP_XOR && !flush), .in_ready(x_in_ready), .in_data(f_data),
    .out_valid(x_valid), .out_ready(x_ready), .out_data(x_data));

  toeplitz_extractor #(.N_IN(TOEP_N_IN), .N_OUT(TOEP_N_OUT), .W(N_MTJ)) u_toep (
    .clk, .rst_n, .clr(flush), .seed(toeplitz_seed),
    .in_valid(f_valid && pp_mode == PP_TOEPLITZ && !flush), .in_ready(t_in_ready), .in_data(f_data),
    .out_valid(t_valid), .out_ready(t_ready), .out_data(t_data));

  always_comb begin
    f_ready    = 1'b0;
    x_ready    = 1'b0;
    t_ready    = 1'b0;
    p_in_valid = 1'b0;
    p_in_data  = f_data;
    unique case (pp_mode)
      PP_XOR: begin
        f_ready    = x_in_ready;
        p_in_valid = x_valid;
        p_in_data  = x_data;
        x_ready    = p_in_ready;
      end
      PP_TOEPLITZ: begin
        f_ready    = t_in_ready;
        p_in_valid = t_valid;
        p_in_data  = t_data;
        t_ready    = p_in_ready;
      end
      default: begin
        f_ready    = p_in_ready;
        p_in_valid = f_valid;
      end
    endcase
    if (flush) begin
      f_ready    = 1'b0;
      p_in_valid = 1'b0;
    end
  end

  logic        w_valid, w_ready;
  logic [31:0] w_data;
  word_packer #(.IN_W(N_MTJ), .OUT_W(32)) u_pack (
    .clk, .rst_n, .clr(flush),
    .in_valid(p_in_valid), .in_ready(p_in_ready), .in_data(p_in_data),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data));

  assign rnd_valid = w_valid && w_ready;
  assign rnd_word  = w_data;

  latent_gen u_lat (
    .clk, .rst_n, .clr(flush), .class_idx,
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .out_valid(lat_valid), .out_ready(lat_ready), .out_data(lat_data),
    .out_index(lat_index), .out_last(lat_last));

endmodule
