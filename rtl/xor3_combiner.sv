// xor3_combiner: the lightweight post-processing scheme, a bitwise XOR across
// three raw bits.
//
// Three consecutive raw words w0, w1, w2 (each holding one bit of every MTJ)
// are combined into one output word w0 ^ w1 ^ w2, so every output bit is the
// XOR of three raw bits of the same MTJ from three successive cycles. XOR of
// independent biased bits pulls the bias toward 1/2 (a bias e per bit becomes
// 4e^3). The published scheme XORs three raw bits using in-memory operations;
// which three bits are combined is not stated, and taking the same cell over
// three non-overlapping cycles is this design's choice. Output rate is one word
// per three input words. Both sides are valid/ready streams; the output word is
// registered, and clr empties the combiner.
module xor3_combiner #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  logic [W-1:0] acc;
  logic [1:0]   cnt;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (clr) begin
      acc       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (cnt == 2'd2) begin
          out_data  <= acc ^ in_data;
          out_valid <= 1'b1;
          acc       <= '0;
          cnt       <= '0;
        end else begin
          acc <= acc ^ in_data;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n || clr)
                           out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
