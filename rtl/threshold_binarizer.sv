// threshold_binarizer: turns the 16 sampled MTJ output voltages into 16 bits.
//
// As in the published system, each MTJ has its own pre-characterised threshold
// Vth: a sample above its threshold is stored as 1 (parallel, low-resistance
// state, which raises the voltage over the series sense resistor), otherwise
// as 0. Bit i of the result belongs to MTJ number i+1. Purely combinational;
// the caller registers the result. Code width and unsigned codes are this
// design's choice.
module threshold_binarizer #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 12
) (
  input  logic [N-1:0][W-1:0] sample,
  input  logic [N-1:0][W-1:0] vth,
  output logic [N-1:0]        bits
);
  always_comb begin
    for (int i = 0; i < N; i++) bits[i] = (sample[i] > vth[i]);
  end
endmodule
