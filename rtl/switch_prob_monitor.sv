// switch_prob_monitor: measures the switching probability of every MTJ by
// counting its ones over a window of N_PULSES reset-perturb cycles.
//
// The published characterisation estimates each cell's switching probability
// by averaging its output over 1,000 pulses; this block does the same on the
// live raw words, so the per-cell perturb amplitudes can be trimmed to the
// 50 % point (count = N_PULSES/2) by sweeping perturb_code. A start pulse
// clears the counts and opens a window; the next N_PULSES raw words are
// counted; then done pulses for one clock and the counts hold until the next
// start. count[i] belongs to MTJ number i+1 (bit i of the raw word). Doing the
// averaging in logic, and the start/done handshake, are this design's choice.
module switch_prob_monitor #(
  parameter int unsigned N        = 16,
  parameter int unsigned N_PULSES = 1000,
  localparam int unsigned CW      = $clog2(N_PULSES + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 raw_valid,
  input  logic [N-1:0]         raw_word,
  output logic                 busy,
  output logic                 done,
  output logic [N-1:0][CW-1:0] count
);
  logic [CW-1:0] seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      seen  <= '0;
      count <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        seen  <= '0;
        count <= '0;
      end else if (busy && raw_valid) begin
        for (int i = 0; i < N; i++) count[i] <= count[i] + CW'(raw_word[i]);
        if (seen == CW'(N_PULSES - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        seen <= seen + 1'b1;
      end
    end
  end
endmodule
