// tb_spi_master: frames through the SPI master into a loop-back slave.
//
// A small mode-0 slave samples mosi on rising SCLK and returns a known
// response frame MSB first on miso. Checks, for random frames and two clock
// dividers: the slave receives exactly the transmitted frame, the master
// returns exactly the slave's response, cs_n is low for exactly FRAME_W*2*DIV
// clocks and done comes 2*DIV*FRAME_W + CS_GAP clocks after the clock that
// takes start.
module tb_spi_master;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DUT with divider 1 (24-bit) and divider 3 (16-bit)
  logic        s1, b1, d1, sc1, mo1, mi1, cs1;
  logic [23:0] tx1, rx1;
  logic        s3, b3, d3, sc3, mo3, mi3, cs3;
  logic [15:0] tx3, rx3;
  spi_master #(.FRAME_W(24), .CLK_DIV(1), .CS_GAP(2)) u1 (.clk, .rst_n, .start(s1), .tx_data(tx1),
    .busy(b1), .done(d1), .rx_data(rx1), .sclk(sc1), .mosi(mo1), .miso(mi1), .cs_n(cs1));
  spi_master #(.FRAME_W(16), .CLK_DIV(3), .CS_GAP(4)) u3 (.clk, .rst_n, .start(s3), .tx_data(tx3),
    .busy(b3), .done(d3), .rx_data(rx3), .sclk(sc3), .mosi(mo3), .miso(mi3), .cs_n(cs3));

  // loop-back slaves
  logic [23:0] srx1, stx1;
  logic [15:0] srx3, stx3;
  always @(negedge cs1) mi1 = stx1[23];
  always @(posedge sc1) if (!cs1) srx1 = {srx1[22:0], mo1};
  always @(negedge sc1) if (!cs1) begin stx1 = {stx1[22:0], 1'b0}; mi1 = stx1[23]; end
  always @(negedge cs3) mi3 = stx3[15];
  always @(posedge sc3) if (!cs3) srx3 = {srx3[14:0], mo3};
  always @(negedge sc3) if (!cs3) begin stx3 = {stx3[14:0], 1'b0}; mi3 = stx3[15]; end

  int cs_low1, cs_low3;
  always @(posedge clk) begin
    if (!cs1) cs_low1++;
    if (!cs3) cs_low3++;
  end

  initial begin
    logic [23:0] resp1;
    logic [15:0] resp3;
    int t0, n;
    s1 = 0; s3 = 0; tx1 = '0; tx3 = '0; mi1 = 0; mi3 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    for (int k = 0; k < 20; k++) begin
      tx1 = 24'($urandom); resp1 = 24'($urandom); stx1 = resp1;
      tx3 = 16'($urandom); resp3 = 16'($urandom); stx3 = resp3;
      cs_low1 = 0; cs_low3 = 0;
      @(negedge clk) begin s1 = 1; s3 = 1; end
      @(negedge clk) begin s1 = 0; s3 = 0; end
      n = 0;
      while (!d1) begin @(posedge clk); n++; end
      check(n == 2*1*24 + 2 + 1, $sformatf("24-bit frame took %0d clocks", n));
      check(srx1 == tx1, $sformatf("slave got %h sent %h", srx1, tx1));
      check(rx1 == resp1, $sformatf("master got %h slave sent %h", rx1, resp1));
      check(cs_low1 == 48, $sformatf("cs low %0d", cs_low1));
      while (!d3) begin @(posedge clk); n++; end
      check(n == 2*3*16 + 4 + 1, $sformatf("16-bit frame took %0d clocks", n));
      check(srx3 == tx3, $sformatf("slave got %h sent %h", srx3, tx3));
      check(rx3 == resp3, $sformatf("master got %h slave sent %h", rx3, resp3));
      check(cs_low3 == 96, $sformatf("cs low %0d", cs_low3));
      check(!b1 && !b3 && cs1 && cs3, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
