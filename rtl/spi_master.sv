// spi_master: one SPI frame per request, mode 0 (SCLK idles low, both sides
// sample on the rising edge, data changes on the falling edge).
//
// A pulse on start while idle drops cs_n and shifts tx_data out MSB first on
// mosi while shifting miso into rx_data. Each SCLK half-period lasts CLK_DIV
// clocks. After the last bit cs_n rises and stays high for CS_GAP clocks, then
// done pulses for one clock with the received frame in rx_data. A frame
// therefore takes 2*CLK_DIV*FRAME_W + CS_GAP clocks from the clock after start
// to done. The published system only states that the FPGA talks to the DAC and
// the ADC over SPI; the mode, the bit order and the timing are this design's.
module spi_master #(
  parameter int unsigned FRAME_W = 24,
  parameter int unsigned CLK_DIV = 1,
  parameter int unsigned CS_GAP  = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [FRAME_W-1:0] tx_data,
  output logic               busy,
  output logic               done,
  output logic [FRAME_W-1:0] rx_data,
  output logic               sclk,
  output logic               mosi,
  input  logic               miso,
  output logic               cs_n
);
  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_GAP} state_e;
  state_e state;
  logic [FRAME_W-1:0]         sh;
  logic [$clog2(FRAME_W)-1:0] bitcnt;
  logic [$clog2(CLK_DIV+CS_GAP+1)-1:0] divcnt;

  assign busy = (state != S_IDLE);
  assign mosi = sh[FRAME_W-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      sh      <= '0;
      rx_data <= '0;
      bitcnt  <= '0;
      divcnt  <= '0;
      sclk    <= 1'b0;
      cs_n    <= 1'b1;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_SHIFT;
          sh     <= tx_data;
          bitcnt <= '0;
          divcnt <= '0;
          cs_n   <= 1'b0;
        end
        S_SHIFT: begin
          if (divcnt == CLK_DIV-1) begin
            divcnt <= '0;
            if (!sclk) begin
              sclk    <= 1'b1;
              rx_data <= {rx_data[FRAME_W-2:0], miso};
            end else begin
              sclk <= 1'b0;
              sh   <= {sh[FRAME_W-2:0], 1'b0};
              if (bitcnt == FRAME_W-1) begin
                state <= S_GAP;
                cs_n  <= 1'b1;
              end else begin
                bitcnt <= bitcnt + 1'b1;
              end
            end
          end else begin
            divcnt <= divcnt + 1'b1;
          end
        end
        S_GAP: begin
          if (divcnt == CS_GAP-1) begin
            divcnt <= '0;
            state  <= S_IDLE;
            done   <= 1'b1;
          end else begin
            divcnt <= divcnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new frame may only be requested while the master is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  // Chip select stays low for the whole data phase.
  a_cs_low: assert property (@(posedge clk) disable iff (!rst_n) (state == S_SHIFT) |-> !cs_n);

endmodule
