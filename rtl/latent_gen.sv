// latent_gen: builds GAN latent codes from 32-bit random words.
//
// One latent code is LATENT_RANDOM (100) random numbers followed by N_CLASSES
// (10) class numbers, 110 single-precision values in all, as in the published
// system: each random number comes from one full 32-bit word w, read as an
// unsigned integer and scaled to [-1, 1], so one code uses 3,200 random bits.
// The class numbers are a one-hot code of class_idx (1.0 at the class,
// 0.0 elsewhere); the published text only says that 10 numbers encode the
// class, so the one-hot form and the order (random numbers first) are this
// design's choice.
//
// Scaling: the published mapping is 2*w/(2^32-1) - 1. Here it is computed as
// (w - 2^31) / 2^31, which differs from it by less than 2^-31, well under one
// unit in the last place of a single-precision number near 1 (2^-24). The
// signed integer w - 2^31 is converted to IEEE 754 single precision with
// round-to-nearest-even and the exponent lowered by 31, so the result is the
// correctly rounded value. Example: w = 3,937,735,687 gives 0.8336511 (0x3F556A28), printed as 0.8337 in the published example.
//
// Interface: 32-bit words in, valid/ready; values out, valid/ready, one per
// clock, with out_index (0..109) and out_last on the 110th. Output registered,
// one clock from an accepted word to its value. class_idx is sampled when a
// class value is produced. clr restarts at element 0.
module latent_gen
  import mtj_trng_pkg::*;
#(
  parameter int unsigned N_RANDOM = LATENT_RANDOM,
  parameter int unsigned N_CLASS  = N_CLASSES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic [3:0]  class_idx,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  output logic [7:0]  out_index,
  output logic        out_last
);
  localparam int unsigned N_TOTAL = N_RANDOM + N_CLASS;

  logic [7:0] elem;          // index of the next element to produce
  logic       adv;           // output register can take a new element
  logic       is_random;
  logic [31:0] fp;

  assign adv       = !out_valid || out_ready;
  assign is_random = (elem < N_RANDOM);
  assign in_ready  = adv && is_random;

  // (w - 2^31) as a signed integer, converted to float and divided by 2^31.
  always_comb begin
    logic        sgn;
    logic [31:0] mag;
    logic [4:0]  msb;
    logic [31:0] norm;      // mag shifted so its leading one is bit 31
    logic [23:0] mant;      // leading one + 23 fraction bits
    logic        guard, sticky, round_up;
    logic [24:0] mant_r;
    logic [7:0]  expo;
    sgn  = !in_data[31];                        // w < 2^31 -> negative
    mag  = sgn ? (32'h8000_0000 - in_data) : (in_data - 32'h8000_0000);
    msb  = '0;
    for (int i = 0; i < 32; i++) if (mag[i]) msb = 5'(i);
    norm     = mag << (5'd31 - msb);
    mant     = norm[31:8];
    guard    = norm[7];
    sticky   = |norm[6:0];
    round_up = guard && (sticky || mant[0]);
    mant_r   = {1'b0, mant} + 25'(round_up);
    // value = mag * 2^-31 = 1.f * 2^(msb-31); biased exponent msb - 31 + 127
    expo     = 8'(msb) + 8'd96 + (mant_r[24] ? 8'd1 : 8'd0);
    if (mag == 0)       fp = FP32_ZERO;
    else if (mant_r[24]) fp = {sgn, expo, 23'd0};
    else                fp = {sgn, expo, mant_r[22:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      elem      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_index <= '0;
      out_last  <= 1'b0;
    end else if (clr) begin
      elem      <= '0;
      out_valid <= 1'b0;
    end else if (adv) begin
      out_valid <= 1'b0;
      if (is_random) begin
        if (in_valid) begin
          out_valid <= 1'b1;
          out_data  <= fp;
          out_index <= elem;
          out_last  <= 1'b0;
          elem      <= elem + 1'b1;
        end
      end else begin
        out_valid <= 1'b1;
        out_data  <= (elem - 8'(N_RANDOM) == 8'(class_idx)) ? FP32_ONE : FP32_ZERO;
        out_index <= elem;
        out_last  <= (elem == N_TOTAL-1);
        elem      <= (elem == N_TOTAL-1) ? '0 : elem + 1'b1;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n || clr)
                           out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
