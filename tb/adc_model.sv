// adc_model: behavioural model of a 16-channel SPI ADC in manual
// single-channel mode, for simulation only.
//
// SPI mode 0, 16-bit frames. The command clocked in during frame k names the
// channel (bits 10:7) to convert; it is sampled from vin when cs_n rises and
// returned during frame k+1 as {chan_id[3:0], result[11:0]}, MSB first, the
// first bit driven when cs_n falls and the rest after each falling SCLK edge.
// last_sample[ch] keeps the value last converted on each channel so a
// testbench can predict the controller's bits.
module adc_model
  import mtj_trng_pkg::*;
(
  input  logic                  sclk,
  input  logic                  mosi,
  output logic                  miso,
  input  logic                  cs_n,
  input  adc_code_t [N_MTJ-1:0] vin,
  output adc_code_t [N_MTJ-1:0] last_sample,
  output int                    n_frames,
  output int                    n_bad_frames
);
  logic [ADC_FRAME-1:0] rx, tx;
  int                   nbits;

  initial begin
    rx = '0; tx = '0; miso = 1'b0; nbits = 0; n_frames = 0; n_bad_frames = 0; last_sample = '0;
  end

  always @(negedge cs_n) begin
    nbits = 0;
    miso  = tx[ADC_FRAME-1];
  end
  always @(posedge sclk) if (!cs_n) begin
    rx = {rx[ADC_FRAME-2:0], mosi};
    nbits++;
  end
  always @(negedge sclk) if (!cs_n) begin
    tx   = {tx[ADC_FRAME-2:0], 1'b0};
    miso = tx[ADC_FRAME-1];
  end
  always @(posedge cs_n) begin
    n_frames++;
    if (nbits != ADC_FRAME || rx[15] != 1'b0 || rx[14:11] != 4'b0001) n_bad_frames++;
    else begin
      last_sample[rx[10:7]] = vin[rx[10:7]];
      tx = {rx[10:7], vin[rx[10:7]]};
    end
  end
endmodule
