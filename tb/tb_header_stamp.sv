// tb_header_stamp: feeds random 52-bit words with random gaps and checks each output
// word against {low 12 bits of the word count, input} and word_time against the
// count, with one clock of latency.
module tb_header_stamp;
  import digitizer_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic [DATA_W-1:0] din = '0;
  logic din_valid = 1'b0, dout_valid;
  word_t dout;
  logic [TIME_W-1:0] word_time;
  int checks = 0, failures = 0;
  longint unsigned n = 0;

  header_stamp dut (.*);

  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DATA_W-1:0] d;
    logic v;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int i = 0; i < 3000; i++) begin
      @(posedge clk); #1;
      // check the word from the previous clock
      if (v && i > 0) begin
        checks++;
        if (!dout_valid || dout !== {n[HDR_W-1:0], d} || word_time !== TIME_W'(n)) begin
          failures++;
          $display("word %0d: got %h t=%0d", n, dout, word_time);
        end
        n++;
      end else if (i > 0) begin
        checks++;
        if (dout_valid) failures++;
      end
      v = ($urandom_range(0, 3) != 0);
      d = {20'($urandom), 32'($urandom)};
      din = d; din_valid = v;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
