// raw_fifo: on-FPGA store for the raw random words.
//
// The MTJ array produces words at a fixed physical rate and cannot be paused,
// so the write side has no ready signal: a word that arrives while the store is
// full is dropped and counted in overflow_count (saturating). The read side is
// a valid/ready stream. Storage is a DEPTH x WIDTH array written and read
// synchronously; a word written in one clock can be read from the next. The
// published system stores the raw bits in the FPGA; the depth, the drop policy
// and the handshake are this design's choice.
module raw_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH):0]   level,
  output logic [15:0]              overflow_count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop, full;

  assign full      = (level == DEPTH);
  assign out_valid = (level != 0);
  assign out_data  = mem[rd_ptr];
  assign pop       = out_valid && out_ready;
  assign push      = in_valid && !full;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr         <= '0;
      rd_ptr         <= '0;
      level          <= '0;
      overflow_count <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      level <= level + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
      if (in_valid && full && overflow_count != '1) overflow_count <= overflow_count + 1'b1;
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) level <= DEPTH);
endmodule
