// tb_spi_master: sends random 24-bit words and decodes the SPI lines as a mode-0
// device would (sample mosi on rising sclk while cs_n is low). Checks each received
// word, the number of clock edges, that mosi never changes while sclk is high, that
// busy covers the transfer and that a transfer takes 24 * 2 * HALF_PERIOD + HALF_PERIOD
// clocks plus one to start, from start to done.
module tb_spi_master;
  localparam int HP = 3;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0;
  logic [23:0] data = '0;
  logic busy, done, sclk, mosi, cs_n;
  int checks = 0, failures = 0;
  logic [23:0] rx;
  int nbits = 0;

  spi_master #(.WORD_W(24), .HALF_PERIOD(HP)) dut (.*);

  always #4 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge sclk) if (!cs_n) begin rx <= {rx[22:0], mosi}; nbits <= nbits + 1; end
  always @(mosi) if (sclk && !cs_n && !rst) begin failures++; $display("mosi changed with sclk high"); end

  initial begin
    logic [23:0] w;
    int cyc;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (!cs_n || sclk || busy) failures++;
    for (int k = 0; k < 20; k++) begin
      w = 24'($urandom);
      nbits = 0;
      @(posedge clk); #1 start = 1'b1; data = w;
      @(posedge clk); #1 start = 1'b0; data = 24'($urandom);   // data need only be valid at start
      cyc = 1;
      while (!done) begin
        checks++;
        if (!busy) begin failures++; $display("busy low during transfer"); end
        @(posedge clk); #1; cyc++;
        if (cyc > 1000) break;
      end
      checks++;
      if (rx !== w || nbits != 24 || !cs_n) begin
        failures++; $display("word %0d: sent %h got %h (%0d bits)", k, w, rx, nbits);
      end
      checks++;
      if (cyc != 24 * 2 * HP + HP + 1) begin failures++; $display("transfer took %0d clocks", cyc); end
      // a start while busy is ignored
      if (k == 5) begin
        @(posedge clk); #1 start = 1'b1; data = 24'hABCDEF;
        @(posedge clk); #1 start = 1'b0;
        repeat (5) @(posedge clk); #1 start = 1'b1; data = 24'h123456;
        @(posedge clk); #1 start = 1'b0;
        @(posedge done); #1;
        checks++;
        if (rx !== 24'hABCDEF) begin failures++; $display("start while busy disturbed word"); end
        repeat (2 * HP) @(posedge clk);
      end
      repeat ($urandom_range(0, 5)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
