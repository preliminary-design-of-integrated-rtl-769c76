// fifo_1to2: 1:2 width-converting asynchronous FIFO between the ADC clock and the
// 125 MHz global clock.
//
// On the write side (adc_clk, 250 MHz) two consecutive 26-bit IDDR words are packed
// into one 52-bit word, the first word in the low half, and the pair is written into
// a small dual-clock FIFO. Read and write pointers cross the clock boundary as Gray
// code through two-flop synchronisers. On the read side (clk) a word is popped
// whenever the FIFO is not empty and shown on dout with dout_valid high for one cycle,
// so the reader sees one 52-bit word per clock on average (4 samples x 125 MHz =
// 500 MSPS). overflow is a sticky flag, in the adc_clk domain, set when a word had to
// be written into a full FIFO and was lost.
//
// Timing: a pair written at an adc_clk edge appears on dout about three clk cycles
// later (synchroniser plus read register).
// The 26-to-52 conversion and the crossing between the two clocks follow the paper;
// the depth, the auto-pop read side and the Gray-pointer structure are this design's.
module fifo_1to2 #(
  parameter int unsigned IN_W       = 26,
  parameter int unsigned DEPTH_LOG2 = 4
) (
  input  logic              adc_clk,
  input  logic              adc_rst,
  input  logic [IN_W-1:0]   din,
  input  logic              din_valid,
  output logic              overflow,

  input  logic              clk,
  input  logic              rst,
  output logic [2*IN_W-1:0] dout,
  output logic              dout_valid
);

  localparam int unsigned DEPTH = 1 << DEPTH_LOG2;
  localparam int unsigned PW    = DEPTH_LOG2 + 1;

  logic [2*IN_W-1:0] mem [DEPTH];

  // ---------------- write side ----------------
  logic            phase;
  logic [IN_W-1:0] first_half;
  logic [PW-1:0]   wbin, wgray;
  logic [PW-1:0]   rbin, rgray;
  logic [PW-1:0]   rgray_s1, rgray_s2;
  logic            full;

  function automatic logic [PW-1:0] bin2gray(input logic [PW-1:0] b);
    return b ^ (b >> 1);
  endfunction

  assign full = (wgray == {~rgray_s2[PW-1:PW-2], rgray_s2[PW-3:0]});

  always_ff @(posedge adc_clk) begin
    if (adc_rst) begin
      phase      <= 1'b0;
      first_half <= '0;
      wbin       <= '0;
      wgray      <= '0;
      overflow   <= 1'b0;
      rgray_s1   <= '0;
      rgray_s2   <= '0;
    end else begin
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
      if (din_valid) begin
        phase <= ~phase;
        if (!phase) begin
          first_half <= din;
        end else if (full) begin
          overflow <= 1'b1;
        end else begin
          wbin  <= wbin + 1'b1;
          wgray <= bin2gray(wbin + 1'b1);
        end
      end
    end
  end

  always_ff @(posedge adc_clk) begin
    if (din_valid && phase && !full)
      mem[wbin[DEPTH_LOG2-1:0]] <= {din, first_half};
  end

  // ---------------- read side ----------------
  logic [PW-1:0] wgray_s1, wgray_s2;
  logic          empty;

  assign empty = (rgray == wgray_s2);

  always_ff @(posedge clk) begin
    if (rst) begin
      rbin       <= '0;
      rgray      <= '0;
      wgray_s1   <= '0;
      wgray_s2   <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      wgray_s1   <= wgray;
      wgray_s2   <= wgray_s1;
      dout_valid <= 1'b0;
      if (!empty) begin
        dout       <= mem[rbin[DEPTH_LOG2-1:0]];
        dout_valid <= 1'b1;
        rbin       <= rbin + 1'b1;
        rgray      <= bin2gray(rbin + 1'b1);
      end
    end
  end

endmodule
