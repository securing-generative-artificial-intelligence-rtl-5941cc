// word_packer: gathers IN_W-bit words of the random bit stream into OUT_W-bit
// words.
//
// The latent-code generator takes the random stream 32 bits at a time, while
// the MTJ array delivers 16 bits per cycle. OUT_W/IN_W input words are
// concatenated, the first one in the most significant position, so the bit
// order of the stream is kept MSB first. Valid/ready on both sides; the output
// word is registered and clr drops a partly filled word. The 32-bit grouping
// follows the published system; the bit order is this design's choice.
module word_packer #(
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data
);
  localparam int unsigned RATIO = OUT_W / IN_W;

  logic [OUT_W-1:0]               sh;
  logic [$clog2(RATIO+1)-1:0]     cnt;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh        <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (clr) begin
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (cnt == RATIO-1) begin
          out_data  <= (OUT_W)'({sh, in_data});
          out_valid <= 1'b1;
          cnt       <= '0;
        end else begin
          sh  <= (OUT_W)'({sh, in_data});
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  initial begin
    assert (OUT_W % IN_W == 0 && RATIO >= 2) else $error("OUT_W must be a multiple of IN_W");
  end
endmodule
