// ring_buffer: circular sample store built on a true dual-port RAM.
//
// Port A is the write port: every valid 64-bit word is written at wr_ptr, which then
// advances by one and wraps at DEPTH, so the buffer always holds the last DEPTH words
// (1024 words = 4096 samples = 8.2 us at 500 MSPS). wr_ptr is the address the current
// input word goes to; the trigger uses it as the word's position. Port B is the read
// port used by the event packager: rd_data shows the word at rd_addr one clock after
// rd_en. Both ports run on the 125 MHz global clock. The RAM is a true dual-port
// primitive in the paper; here port A only writes and port B only reads, since the
// readout chain needs nothing more.
// Width and depth follow the paper (64-bit, 1k deep, true dual-port); the write
// pointer scheme and read latency are this design's choices.
module ring_buffer #(
  parameter int unsigned DEPTH = digitizer_pkg::RING_DEPTH,
  parameter int unsigned W     = digitizer_pkg::WORD_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  // port A: circular write
  input  logic          wr_valid,
  input  logic [W-1:0]  wr_data,
  output logic [AW-1:0] wr_ptr,
  // port B: random access
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rst) wr_ptr <= '0;
    else if (wr_valid) wr_ptr <= wr_ptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
