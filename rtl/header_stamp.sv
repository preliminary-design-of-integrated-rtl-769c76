// header_stamp: adds the 12-bit header that widens the 52-bit sample word to the
// 64-bit ring-buffer word.
//
// A 48-bit counter counts the words of the sample stream since reset; its low 12 bits
// are placed in bits 63:52 of each word and the full count comes out on word_time with
// the word, so that later stages can time-stamp events (sample time = 4*word_time +
// sample index). The output is registered: one clock of latency, one word per valid
// input.
// The paper gives the 52-to-64 widening and the "header"; what the header holds (a
// word sequence number) is this design's choice.
module header_stamp
  import digitizer_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic [DATA_W-1:0] din,
  input  logic              din_valid,
  output word_t             dout,
  output logic              dout_valid,
  output logic [TIME_W-1:0] word_time
);

  logic [TIME_W-1:0] count;

  always_ff @(posedge clk) begin
    if (rst) begin
      count      <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
      word_time  <= '0;
    end else begin
      dout_valid <= din_valid;
      if (din_valid) begin
        dout      <= {count[HDR_W-1:0], din};
        word_time <= count;
        count     <= count + 1'b1;
      end
    end
  end

endmodule
