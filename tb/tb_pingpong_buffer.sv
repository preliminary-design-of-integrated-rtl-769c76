// tb_pingpong_buffer: streams numbered words into the ping-pong logic with random
// gaps. Checks that BRAM 0 raises its full flag after exactly 8192 words (64 KB) and
// writing moves to BRAM 1, that free_words follows the fill, that with both BRAMs
// locked further words are dropped and counted, that a release pulse unlocks a BRAM
// and writing resumes at its address 0, and that both BRAMs read back the right words
// through their read ports (one clock latency).
module tb_pingpong_buffer;
  import digitizer_pkg::*;
  localparam int WORDS = 8192;
  logic clk = 1'b0, rst = 1'b1;
  logic in_valid = 1'b0, active;
  word_t in_data = '0;
  logic [1:0] full, release_bank = '0, rd_en = '0;
  logic [15:0] free_words;
  logic [31:0] overflow;
  logic [1:0][12:0] rd_addr = '0;
  word_t [1:0] rd_data;
  int checks = 0, failures = 0;
  int unsigned sent = 0;

  pingpong_buffer dut (.*);

  always #4 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  task automatic push(input int n);
    for (int i = 0; i < n; i++) begin
      @(posedge clk); #1;
      in_valid = 1'b1; in_data = {32'hB0B0B0B0, 32'(sent)}; sent++;
      if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1 in_valid = 1'b0; end
    end
    @(posedge clk); #1 in_valid = 1'b0;
  endtask

  task automatic readback(input int bank, input int unsigned first, input int n);
    int bad = 0;
    for (int a = 0; a < n; a++) begin
      @(posedge clk); #1;
      rd_en[bank] = 1'b1; rd_addr[bank] = 13'(a);
      @(posedge clk); #1;
      rd_en[bank] = 1'b0;
      if (rd_data[bank] !== {32'hB0B0B0B0, 32'(first + a)}) bad++;
    end
    check(bad == 0, $sformatf("BRAM %0d read-back, %0d bad words", bank, bad));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 1'b0;
    @(posedge clk); #1;
    check(full == 2'b00 && active == 1'b0 && free_words == 16'(2 * WORDS), "reset state");
    push(100);
    check(free_words == 16'(2 * WORDS - 100), "free words after 100");
    push(WORDS - 101);
    check(full == 2'b00 && active == 1'b0, "not full one word early");
    push(1);
    check(full == 2'b01 && active == 1'b1, "BRAM 0 full after 8192 words, BRAM 1 active");
    check(free_words == 16'(WORDS), "free words with BRAM 0 locked");
    push(WORDS);
    check(full == 2'b11 && free_words == 16'd0, "both BRAMs locked");
    push(10);
    check(overflow == 32'd10, "words dropped while both locked");
    readback(0, 0, WORDS);
    readback(1, WORDS, WORDS);
    // release BRAM 0: writing resumes there at address 0
    @(posedge clk); #1 release_bank = 2'b01;
    @(posedge clk); #1 release_bank = 2'b00;
    check(full == 2'b10 && free_words == 16'(WORDS), "BRAM 0 released");
    sent = 50000;
    push(5);
    readback(0, 50000, 5);
    check(full == 2'b10 && active == 1'b0, "writing into released BRAM 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
