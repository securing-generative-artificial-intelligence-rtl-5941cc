// dac_model: behavioural model of a 16-channel bipolar SPI DAC, for simulation
// only (not synthesizable).
//
// SPI mode 0, 24-bit frames {cmd[3:0], addr[3:0], code[15:0]} MSB first,
// acted on when cs_n rises. Commands as in mtj_trng_pkg: WR_INPUT loads one
// input register, UPDATE_ALL copies every input register to its output,
// WR_ALL_OUT drives every output with the code and leaves the input registers
// alone. Outputs are the DAC codes (two's complement), standing for the
// channel voltages. Counts frames of each kind for the testbenches.
module dac_model
  import mtj_trng_pkg::*;
(
  input  logic                  sclk,
  input  logic                  mosi,
  input  logic                  cs_n,
  output dac_code_t [N_MTJ-1:0] vout,
  output dac_code_t [N_MTJ-1:0] input_reg,
  output int                    n_frames,
  output int                    n_bad_frames,
  output int                    n_update_all,
  output int                    n_write_all
);
  logic [DAC_FRAME-1:0] sh;
  int                   nbits;

  initial begin
    vout = '0; input_reg = '0; n_frames = 0; n_bad_frames = 0; n_update_all = 0; n_write_all = 0;
    nbits = 0; sh = '0;
  end

  always @(negedge cs_n) nbits = 0;
  always @(posedge sclk) if (!cs_n) begin
    sh = {sh[DAC_FRAME-2:0], mosi};
    nbits++;
  end
  always @(posedge cs_n) begin
    n_frames++;
    if (nbits != DAC_FRAME) n_bad_frames++;
    else begin
      case (sh[23:20])
        DAC_WR_INPUT:   input_reg[sh[19:16]] = sh[15:0];
        DAC_UPDATE_ALL: begin vout = input_reg; n_update_all++; end
        DAC_WR_ALL_OUT: begin for (int i = 0; i < N_MTJ; i++) vout[i] = sh[15:0]; n_write_all++; end
        default:        n_bad_frames++;
      endcase
    end
  end
endmodule
