// tb_ring_buffer: writes 2600 random words (more than twice round the 1024-word
// ring), checking wr_ptr against a model pointer, and reads random addresses
// through port B while writing, comparing with a model of the last 1024 words
// (one clock read latency).
module tb_ring_buffer;
  localparam int DEPTH = 1024;
  logic clk = 1'b0, rst = 1'b1;
  logic wr_valid = 1'b0, rd_en = 1'b0;
  logic [63:0] wr_data = '0, rd_data;
  logic [9:0] wr_ptr, rd_addr = '0;
  logic [63:0] model [DEPTH];
  int checks = 0, failures = 0;

  ring_buffer dut (.*);

  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned ptr = 0, written = 0;
    logic [63:0] exp_rd;
    logic pend = 1'b0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      @(posedge clk); #1;
      if (wr_valid) begin
        model[ptr] = wr_data;
        ptr = (ptr + 1) % DEPTH;
        written++;
      end
      if (pend) begin
        checks++;
        if (rd_data !== exp_rd) begin
          failures++;
          $display("read mismatch at cycle %0d", i);
        end
      end
      checks++;
      if (wr_ptr !== 10'(ptr)) begin failures++; $display("wr_ptr %0d != %0d", wr_ptr, ptr); end
      wr_valid = ($urandom_range(0, 7) != 0) && (written < 2600);
      wr_data  = {$urandom, $urandom};
      // read a word that is already written and not overwritten this clock
      pend = (written > DEPTH) && ($urandom_range(0, 1) == 1);
      rd_en = pend;
      rd_addr = 10'(ptr + 1 + $urandom_range(0, DEPTH - 2));
      exp_rd = model[rd_addr];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
