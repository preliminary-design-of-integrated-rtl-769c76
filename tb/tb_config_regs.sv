// tb_config_regs: writes every register and reads it back, checks the clamping of
// PRE_LEN and REC_LEN, the cfg outputs, the one-clock RELEASE pulses, the status
// read-back, and that a write to an SPI register starts that SPI master once it is
// idle (a model SPI master stays busy for a few clocks after each start).
module tb_config_regs;
  import digitizer_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic wr_en = 1'b0;
  logic [3:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  cfg_t cfg;
  logic [2:0] spi_start, spi_busy;
  logic [2:0][23:0] spi_word;
  logic [1:0] release_bank;
  logic [1:0] pp_full = 2'b10;
  logic pp_active = 1'b1, fifo_overflow = 1'b0;
  logic [31:0] event_no = 32'd77, dropped = 32'd5, missed = 32'd9, pp_overflow = 32'd0;
  int checks = 0, failures = 0;
  int starts [3] = '{0, 0, 0};
  int busy_cnt [3] = '{0, 0, 0};
  int rel_pulses = 0;

  config_regs dut (.*);

  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model SPI masters: busy for 10 clocks after a start
  always @(posedge clk) if (!rst) begin
    for (int d = 0; d < 3; d++) begin
      if (spi_start[d]) begin
        starts[d]++;
        busy_cnt[d] <= 10;
        if (spi_busy[d]) begin failures++; $display("start while busy on %0d", d); end
      end else if (busy_cnt[d] > 0) busy_cnt[d] <= busy_cnt[d] - 1;
    end
    if (release_bank != 0) rel_pulses++;
  end
  always_comb for (int d = 0; d < 3; d++) spi_busy[d] = (busy_cnt[d] > 0);

  task automatic wr(input int a, input int unsigned d);
    @(posedge clk); #1 wr_en = 1'b1; wr_addr = 4'(a); wr_data = d;
    @(posedge clk); #1 wr_en = 1'b0;
  endtask

  task automatic expect_rd(input int a, input int unsigned d, input string what);
    rd_addr = 4'(a); #1;
    checks++;
    if (rd_data !== d) begin failures++; $display("%s: read %h expected %h", what, rd_data, d); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (cfg.run !== 1'b0) begin failures++; $display("run set after reset"); end
    wr(1, 32'h0000_0ABC);  expect_rd(1, 32'h0ABC, "threshold");
    wr(2, 32'd100);        expect_rd(2, 32'd100, "pre_len");
    wr(2, 32'd5000);       expect_rd(2, 32'(RING_DEPTH - 16), "pre_len clamp");
    wr(3, 32'd0);          expect_rd(3, 32'd1, "rec_len minimum");
    wr(3, 32'd40000);      expect_rd(3, 32'(2 * BRAM_WORDS - 3), "rec_len clamp");
    wr(3, 32'd2500);       expect_rd(3, 32'd2500, "rec_len");
    wr(4, 32'h1F7);        expect_rd(4, 32'hF7, "channel");
    wr(0, 32'h3);          expect_rd(0, 32'h3, "ctrl");
    checks++;
    if (cfg.run !== 1'b1 || cfg.polarity_neg !== 1'b1 || cfg.threshold !== 12'hABC ||
        cfg.pre_len !== 16'(RING_DEPTH - 16) || cfg.rec_len !== 16'd2500 || cfg.channel !== 8'hF7) begin
      failures++; $display("cfg outputs wrong");
    end
    expect_rd(9, 32'h6, "status");
    expect_rd(10, 32'd77, "events");
    expect_rd(11, 32'd5, "dropped");
    expect_rd(12, 32'd9, "missed");
    // SPI: two back-to-back writes to the DAC, one to the ADC
    wr(7, 32'hFF30_0ABC);  expect_rd(7, 32'h30_0ABC, "DAC word");
    wr(5, 32'h00_1234);
    repeat (4) @(posedge clk);
    wr(7, 32'h31_0DEF);
    repeat (40) @(posedge clk);
    checks++;
    if (starts[0] != 1 || starts[1] != 0 || starts[2] != 2) begin
      failures++; $display("SPI starts %0d %0d %0d", starts[0], starts[1], starts[2]);
    end
    checks++;
    if (spi_word[2] !== 24'h31_0DEF || spi_word[0] !== 24'h00_1234) begin
      failures++; $display("SPI words wrong");
    end
    // release pulses
    wr(8, 32'h2);
    @(posedge clk); #1;
    checks++;
    if (rel_pulses != 1) begin failures++; $display("%0d release pulses", rel_pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
