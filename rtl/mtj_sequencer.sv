// mtj_sequencer: runs the reset-perturb-sample cycle on all 16 MTJs in parallel
// and delivers one 16-bit raw random word per cycle.
//
// Following the published prototype, every cycle first applies a negative reset
// pulse that sets each MTJ to the antiparallel state, then a positive perturb
// pulse whose amplitude is fine-tuned per MTJ for a 50 % switching probability,
// then samples each MTJ's output voltage with the ADC and compares it with the
// MTJ's threshold. With 16 cells and a 100 kHz cycle this gives 1.6 Mbit/s.
//
// How the cycle is laid out on the two SPI buses is this design's choice:
//   - after enable rises (and whenever reload pulses) the 16 per-MTJ perturb
//     codes are written once into the DAC input registers (PRELOAD);
//   - a cycle starts every CYCLE_CLKS clocks (1000 clocks at an assumed
//     100 MHz clock = 100 kHz). It sends "drive all outputs with reset_code"
//     (reset pulse starts), waits RESET_HOLD, sends "update all outputs from the
//     input registers" (all perturb pulses start together), waits PULSE_HOLD,
//     sends "drive all outputs with read_code" (perturb pulses end, a small
//     read bias stays on), then reads the 16 ADC channels with 17 pipelined
//     frames, the result of frame k arriving in frame k+1 tagged with its
//     channel number;
//   - with the default 24-bit DAC frames at SCLK = clk/2 the reset pulse on
//     the cells lasts RESET_HOLD + 52 clocks (0.92 us) and the perturb pulse
//     PULSE_HOLD + 52 clocks (2.02 us); a whole cycle's work takes about 950
//     of the 1000 clocks. The published 5 us pulse width belongs to the
//     device characterisation and does not fit a 10 us cycle with 16
//     channels read one after another, so the 100 kHz rate was kept;
//   - raw_valid pulses for one clock with raw_word once the last sample is in.
//     The word comes out at a fixed offset in every cycle, so words are exactly
//     CYCLE_CLKS apart.
// A cycle that is due while the previous one is still running is skipped and
// counted in overrun_count; a result whose channel tag is wrong is counted in
// id_error_count (its bit still uses the sample).
module mtj_sequencer
  import mtj_trng_pkg::*;
#(
  parameter int unsigned CYCLE_CLKS  = 1000,
  parameter int unsigned RESET_HOLD  = 40,
  parameter int unsigned PULSE_HOLD  = 150,
  parameter int unsigned DAC_CLK_DIV = 1,
  parameter int unsigned ADC_CLK_DIV = 1,
  parameter int unsigned CS_GAP      = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        enable,
  input  logic                        reload,
  input  dac_code_t [N_MTJ-1:0]       perturb_code,
  input  adc_code_t [N_MTJ-1:0]       vth,
  input  dac_code_t                   reset_code,
  input  dac_code_t                   read_code,
  // DAC SPI
  output logic                        dac_sclk,
  output logic                        dac_mosi,
  output logic                        dac_cs_n,
  // ADC SPI
  output logic                        adc_sclk,
  output logic                        adc_mosi,
  input  logic                        adc_miso,
  output logic                        adc_cs_n,
  // raw random words
  output logic                        raw_valid,
  output logic [N_MTJ-1:0]            raw_word,
  output logic                        running,
  output logic [15:0]                 overrun_count,
  output logic [15:0]                 id_error_count
);
  typedef enum logic [3:0] {
    S_IDLE, S_PRELOAD, S_WAIT, S_RESET, S_RHOLD, S_PERTURB, S_PHOLD, S_READV, S_ADC, S_DONE
  } state_e;
  state_e state;

  logic                 dac_start, dac_busy, dac_done;
  logic [DAC_FRAME-1:0] dac_tx, dac_rx;
  logic                 adc_start, adc_busy, adc_done;
  logic [ADC_FRAME-1:0] adc_tx, adc_rx;

  spi_master #(.FRAME_W(DAC_FRAME), .CLK_DIV(DAC_CLK_DIV), .CS_GAP(CS_GAP)) u_dac_spi (
    .clk, .rst_n, .start(dac_start), .tx_data(dac_tx), .busy(dac_busy), .done(dac_done),
    .rx_data(dac_rx), .sclk(dac_sclk), .mosi(dac_mosi), .miso(1'b0), .cs_n(dac_cs_n));

  spi_master #(.FRAME_W(ADC_FRAME), .CLK_DIV(ADC_CLK_DIV), .CS_GAP(CS_GAP)) u_adc_spi (
    .clk, .rst_n, .start(adc_start), .tx_data(adc_tx), .busy(adc_busy), .done(adc_done),
    .rx_data(adc_rx), .sclk(adc_sclk), .mosi(adc_mosi), .miso(adc_miso), .cs_n(adc_cs_n));

  logic [$clog2(CYCLE_CLKS)-1:0] cyc_cnt;
  logic                          tick;
  logic [15:0]                   hold_cnt;
  logic [4:0]                    idx;          // preload channel / ADC frame number
  logic                          frame_sent;   // current SPI frame was started
  adc_code_t [N_MTJ-1:0]         samples;
  logic [N_MTJ-1:0]              bits;

  threshold_binarizer #(.N(N_MTJ), .W(ADC_BITS)) u_bin (.sample(samples), .vth(vth), .bits(bits));

  assign running = (state != S_IDLE) && (state != S_PRELOAD);
  assign tick    = running && (cyc_cnt == '0);

  // Frame to send in the current state.
  always_comb begin
    dac_tx = dac_frame(DAC_WR_ALL_OUT, '0, reset_code);
    unique case (state)
      S_PRELOAD: dac_tx = dac_frame(DAC_WR_INPUT, idx[CH_BITS-1:0], perturb_code[idx[CH_BITS-1:0]]);
      S_PERTURB: dac_tx = dac_frame(DAC_UPDATE_ALL, '0, '0);
      S_READV:   dac_tx = dac_frame(DAC_WR_ALL_OUT, '0, read_code);
      default:   dac_tx = dac_frame(DAC_WR_ALL_OUT, '0, reset_code);
    endcase
    adc_tx = adc_cmd((idx < N_MTJ) ? idx[CH_BITS-1:0] : '0);
  end

  assign dac_start = !frame_sent && !dac_busy &&
                     (state inside {S_PRELOAD, S_RESET, S_PERTURB, S_READV});
  assign adc_start = !frame_sent && !adc_busy && (state == S_ADC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      cyc_cnt        <= '0;
      hold_cnt       <= '0;
      idx            <= '0;
      frame_sent     <= 1'b0;
      samples        <= '0;
      raw_valid      <= 1'b0;
      raw_word       <= '0;
      overrun_count  <= '0;
      id_error_count <= '0;
    end else begin
      raw_valid <= 1'b0;
      if (dac_start || adc_start) frame_sent <= 1'b1;

      if (running) cyc_cnt <= (cyc_cnt == CYCLE_CLKS-1) ? '0 : cyc_cnt + 1'b1;
      else         cyc_cnt <= '0;
      if (tick && state != S_WAIT && overrun_count != '1) overrun_count <= overrun_count + 1'b1;

      if (!enable && !dac_busy && !adc_busy) begin
        state      <= S_IDLE;
        frame_sent <= 1'b0;
      end else begin
        unique case (state)
          S_IDLE: if (enable) begin
            state <= S_PRELOAD;
            idx   <= '0;
          end
          S_PRELOAD: if (dac_done) begin
            frame_sent <= 1'b0;
            if (idx == N_MTJ-1) state <= S_WAIT;
            idx <= idx + 1'b1;
          end
          S_WAIT: if (reload) begin
            state <= S_PRELOAD;
            idx   <= '0;
          end else if (tick) begin
            state <= S_RESET;
          end
          S_RESET: if (dac_done) begin
            frame_sent <= 1'b0;
            hold_cnt   <= '0;
            state      <= S_RHOLD;
          end
          S_RHOLD: if (hold_cnt == RESET_HOLD-1) state <= S_PERTURB;
                   else hold_cnt <= hold_cnt + 1'b1;
          S_PERTURB: if (dac_done) begin
            frame_sent <= 1'b0;
            hold_cnt   <= '0;
            state      <= S_PHOLD;
          end
          S_PHOLD: if (hold_cnt == PULSE_HOLD-1) state <= S_READV;
                   else hold_cnt <= hold_cnt + 1'b1;
          S_READV: if (dac_done) begin
            frame_sent <= 1'b0;
            idx        <= '0;
            state      <= S_ADC;
          end
          S_ADC: if (adc_done) begin
            frame_sent <= 1'b0;
            if (idx != 0) begin
              samples[idx-1] <= adc_rx[ADC_BITS-1:0];
              if (adc_rx[ADC_FRAME-1 -: CH_BITS] != CH_BITS'(idx-1) && id_error_count != '1)
                id_error_count <= id_error_count + 1'b1;
            end
            if (idx == N_MTJ) state <= S_DONE;
            idx <= idx + 1'b1;
          end
          S_DONE: begin
            raw_valid <= 1'b1;
            raw_word  <= bits;
            state     <= S_WAIT;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
