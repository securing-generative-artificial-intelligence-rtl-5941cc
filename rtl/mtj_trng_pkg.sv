// mtj_trng_pkg: types and constants shared by the MTJ true random number
// generator (TRNG) controller and its post-processing chain.
//
// The array holds 16 stochastic magnetic tunnel junctions (MTJs), each driven by
// one channel of a 16-channel DAC and read back by one channel of a 16-channel
// ADC, both over SPI. The array size, the 16-channel converters and the 100 kHz
// reset-perturb cycle follow the published prototype. The SPI frame layouts below
// are this design's choice, written in the style of common 16-channel parts
// (24-bit command/address/data DAC frames, 16-bit ADC frames with a channel tag);
// the command codes must be matched to the converter actually fitted.
package mtj_trng_pkg;

  // Array and converter sizes.
  localparam int unsigned N_MTJ     = 16;   // MTJ cells read in parallel
  localparam int unsigned DAC_BITS  = 16;   // bipolar DAC code, two's complement
  localparam int unsigned ADC_BITS  = 12;   // ADC conversion result
  localparam int unsigned CH_BITS   = 4;    // channel address, 16 channels
  localparam int unsigned DAC_FRAME = 24;   // {cmd[3:0], addr[3:0], code[15:0]}
  localparam int unsigned ADC_FRAME = 16;   // command out / {chan_id, result} in

  typedef logic signed [DAC_BITS-1:0] dac_code_t;
  typedef logic        [ADC_BITS-1:0] adc_code_t;
  typedef logic        [CH_BITS-1:0]  ch_t;

  // DAC commands (upper nibble of a 24-bit frame).
  typedef enum logic [3:0] {
    DAC_WR_INPUT   = 4'h1,  // load the input register of channel addr, output unchanged
    DAC_UPDATE_ALL = 4'h2,  // copy every input register to its output at CS rise
    DAC_WR_ALL_OUT = 4'h9   // drive every output with code at CS rise, input registers kept
  } dac_cmd_e;

  function automatic logic [DAC_FRAME-1:0] dac_frame(dac_cmd_e cmd, ch_t addr, dac_code_t code);
    return {cmd, addr, code};
  endfunction

  // ADC command frame, manual single-channel mode: bit 15 = 0 (mode register),
  // bits 14:11 = scan mode 4'b0001 (manual), bits 10:7 = channel to convert
  // next, bit 2 = 1 (tag results with the channel number). The result of the
  // channel requested in frame k comes back during frame k+1 as
  // {chan_id[3:0], result[11:0]}.
  function automatic logic [ADC_FRAME-1:0] adc_cmd(ch_t ch);
    return {1'b0, 4'b0001, ch, 4'b0000, 1'b1, 2'b00};
  endfunction

  // Post-processing scheme applied to the raw bit stream.
  typedef enum logic [1:0] {
    PP_RAW      = 2'd0,  // raw MTJ bits
    PP_XOR      = 2'd1,  // bitwise XOR of three raw words
    PP_TOEPLITZ = 2'd2   // Toeplitz-hash extraction
  } pp_mode_e;

  // Latent code layout: 100 random numbers then 10 class numbers.
  localparam int unsigned LATENT_RANDOM = 100;
  localparam int unsigned N_CLASSES     = 10;
  localparam logic [31:0] FP32_ONE      = 32'h3F80_0000;
  localparam logic [31:0] FP32_ZERO     = 32'h0000_0000;

endpackage
