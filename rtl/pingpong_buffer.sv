// pingpong_buffer: ping-pong logic with two 64 KB BRAMs between the event packager
// and the processor's DMA.
//
// The package stream is written word by word into the active BRAM (8192 x 64 bits).
// When its last word is written the BRAM is full: its full flag is raised, it is
// locked (no further writes) for the processor to copy out, and writing continues at
// address 0 of the other BRAM. A locked BRAM is unlocked by a one-clock pulse on its
// release bit, which the processor gives after the copy. While the BRAM that is due
// next is still locked, incoming words are dropped and counted (overflow); the
// packager avoids this by checking free_words, the words that can still be written
// before both BRAMs are locked, before it starts an event.
//
// The read side of each BRAM is a plain synchronous port (data one clock after
// rd_en), the side an AXI BRAM controller connects to. Both sides use the same clock.
// Two BRAMs, 64 KB each, the full flags and the switch on full follow the paper; the
// release handshake, the overflow rule and the single clock are this design's choices.
module pingpong_buffer
  import digitizer_pkg::*;
#(
  parameter int unsigned WORDS = BRAM_WORDS,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  word_t               in_data,
  output logic [1:0]          full,
  output logic                active,
  output logic [15:0]         free_words,
  input  logic [1:0]          release_bank,
  output logic [31:0]         overflow,
  // processor read ports, one per BRAM
  input  logic [1:0]          rd_en,
  input  logic [1:0][AW-1:0]  rd_addr,
  output word_t [1:0]         rd_data
);

  word_t bram0 [WORDS];
  word_t bram1 [WORDS];

  logic [AW-1:0] wr_addr;
  logic          wr_ok;

  assign wr_ok = in_valid && !full[active];

  always_ff @(posedge clk) begin
    if (rst) begin
      full     <= '0;
      active   <= 1'b0;
      wr_addr  <= '0;
      overflow <= '0;
    end else begin
      // releases first, so that a release and a fill in the same clock both count
      for (int b = 0; b < 2; b++)
        if (release_bank[b]) full[b] <= 1'b0;
      if (in_valid && full[active]) overflow <= overflow + 1'b1;
      if (wr_ok) begin
        if (wr_addr == AW'(WORDS - 1)) begin
          full[active] <= 1'b1;
          active       <= ~active;
          wr_addr      <= '0;
        end else begin
          wr_addr <= wr_addr + 1'b1;
        end
      end
    end
  end

  always_comb begin
    logic [16:0] f;
    f = '0;
    if (!full[active])  f = f + 17'(WORDS) - 17'(wr_addr);
    if (!full[~active]) f = f + 17'(WORDS);
    free_words = (f > 17'hFFFF) ? 16'hFFFF : f[15:0];
  end

  always_ff @(posedge clk) begin
    if (wr_ok && !active) bram0[wr_addr] <= in_data;
    if (rd_en[0]) rd_data[0] <= bram0[rd_addr[0]];
  end

  always_ff @(posedge clk) begin
    if (wr_ok && active) bram1[wr_addr] <= in_data;
    if (rd_en[1]) rd_data[1] <= bram1[rd_addr[1]];
  end

endmodule
