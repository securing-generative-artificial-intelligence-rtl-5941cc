// toeplitz_extractor: randomness extraction by Toeplitz hashing, y = T x over
// GF(2).
//
// T is an N_OUT x N_IN Toeplitz matrix fixed by an (N_IN+N_OUT-1)-bit seed s:
// T[i][j] = s[i - j + N_IN - 1]. A block of N_IN input bits x_0..x_{N_IN-1}
// (x_0 is the MSB of the first input word, bits taken MSB first) is hashed to
// N_OUT output bits y_0..y_{N_OUT-1}, emitted as N_OUT/W words with y_0 as the
// MSB of the first word.
//
// The hash is computed as the input streams in: for input bit x_j the column
// j of T, which is the window s[N_IN-1-j +: N_OUT], is XORed into the result
// when x_j = 1. A copy of the seed shifted left W bits per input word turns
// the moving window into fixed bit positions, so W bits are absorbed per
// clock. The published system speeds the same product up with an FFT in
// software; a direct GF(2) product is what suits logic. The matrix size and
// the seed come from the supporting material, not the main text, so the
// defaults here (256 in, 128 out) are this design's. The seed is sampled at
// the start of each block. While the N_OUT/W output words drain, no input is
// taken. clr abandons the current block.
module toeplitz_extractor #(
  parameter int unsigned N_IN  = 256,
  parameter int unsigned N_OUT = 128,
  parameter int unsigned W     = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic [N_IN+N_OUT-2:0]  seed,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [W-1:0]           in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [W-1:0]           out_data
);
  localparam int unsigned SW     = N_IN + N_OUT - 1;
  localparam int unsigned IN_WORDS  = N_IN / W;
  localparam int unsigned OUT_WORDS = N_OUT / W;

  logic [SW-1:0]    win;      // seed shifted left by W per absorbed word
  logic [N_OUT-1:0] acc;      // acc[N_OUT-1-i] holds y_i
  logic [$clog2(IN_WORDS+1)-1:0]  in_cnt;
  logic [$clog2(OUT_WORDS+1)-1:0] out_cnt;
  logic             draining;
  logic [N_OUT-1:0] acc_next;

  assign in_ready  = !draining;
  assign out_valid = draining;
  assign out_data  = acc[N_OUT-1 -: W];

  // XOR the W columns selected by this word's bits into the result.
  always_comb begin
    logic [SW-1:0] w;
    w = (in_cnt == 0) ? seed : win;
    acc_next = (in_cnt == 0) ? '0 : acc;
    for (int b = 0; b < W; b++) begin
      if (in_data[W-1-b]) begin
        for (int i = 0; i < N_OUT; i++)
          acc_next[N_OUT-1-i] = acc_next[N_OUT-1-i] ^ w[N_IN-1-b+i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win      <= '0;
      acc      <= '0;
      in_cnt   <= '0;
      out_cnt  <= '0;
      draining <= 1'b0;
    end else if (clr) begin
      in_cnt   <= '0;
      out_cnt  <= '0;
      draining <= 1'b0;
    end else if (!draining) begin
      if (in_valid) begin
        acc <= acc_next;
        win <= ((in_cnt == 0) ? seed : win) << W;
        if (in_cnt == IN_WORDS-1) begin
          in_cnt   <= '0;
          draining <= 1'b1;
          out_cnt  <= '0;
        end else begin
          in_cnt <= in_cnt + 1'b1;
        end
      end
    end else if (out_ready) begin
      acc <= acc << W;
      if (out_cnt == OUT_WORDS-1) draining <= 1'b0;
      out_cnt <= out_cnt + 1'b1;
    end
  end

  initial begin
    assert (N_IN % W == 0 && N_OUT % W == 0) else $error("N_IN and N_OUT must be multiples of W");
  end
endmodule
