// tb_fifo_1to2: writes a counting sequence of 26-bit words at 250 MHz and reads at
// 125 MHz, the design's clock ratio. Checks that every 52-bit output is the next pair
// {word 2k+1, word 2k} in order, that one word comes out per read clock on average
// (no backlog builds up), and that no overflow is flagged. A second phase slows the
// read clock below half the write clock and checks that overflow is then raised.
module tb_fifo_1to2;
  logic adc_clk = 1'b0, clk = 1'b0, adc_rst = 1'b1, rst = 1'b1;
  logic [25:0] din = '0;
  logic        din_valid = 1'b0, overflow, dout_valid;
  logic [51:0] dout;
  int checks = 0, failures = 0;
  realtime rd_half = 4.0;
  int unsigned next_in = 0, next_out = 0, outs = 0, rd_cycles = 0;

  fifo_1to2 #(.IN_W(26), .DEPTH_LOG2(4)) dut (.*);

  always #2 adc_clk = ~adc_clk;
  always #(rd_half) clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge adc_clk) begin
    if (!adc_rst) begin
      din       <= 26'(next_in);
      din_valid <= 1'b1;
      next_in   <= next_in + 1;
    end
  end

  always @(posedge clk) begin
    if (!rst) rd_cycles <= rd_cycles + 1;
    if (!rst && dout_valid && rd_half == 4.0) begin
      checks++;
      if (dout !== {26'(next_out + 1), 26'(next_out)}) begin
        failures++;
        $display("word %0d: got %h", next_out / 2, dout);
      end
      next_out <= next_out + 2;
      outs     <= outs + 1;
    end
  end

  initial begin
    repeat (4) @(posedge clk);
    adc_rst = 1'b0; rst = 1'b0;
    repeat (2000) @(posedge clk);
    // throughput: at most the few words in flight may lag behind
    checks++;
    if (rd_cycles - outs > 6) begin
      failures++;
      $display("throughput: %0d outputs in %0d read cycles", outs, rd_cycles);
    end
    checks++;
    if (overflow) begin failures++; $display("unexpected overflow"); end
    // slow reader: 100 MHz
    rd_half = 5.0;
    repeat (400) @(posedge clk);
    checks++;
    if (!overflow) begin failures++; $display("overflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
