// config_regs: run settings and status registers behind the processor's GPIO port.
//
// The processor writes 32-bit registers through a simple write strobe (wr_en,
// wr_addr, wr_data) and reads them back combinationally on rd_addr/rd_data:
//   0 CTRL     [0] run (start triggering)  [1] negative pulse polarity
//   1 THRESH   [11:0] trigger threshold, ADC code
//   2 PRE_LEN  [15:0] words kept before the threshold crossing (at most RING_DEPTH-16)
//   3 REC_LEN  [15:0] waveform record length in words (at least 1, at most what the
//              two ping-pong BRAMs hold)
//   4 CHANNEL  [7:0]  channel number written into each package
//   5 SPI_ADC, 6 SPI_VCO, 7 SPI_DAC  [23:0] word sent to that device over SPI
//   8 RELEASE  write 1 to bit b to unlock ping-pong BRAM b after it has been copied
//   9 STATUS   [1:0] BRAM full flags, [2] active BRAM, [3] ADC FIFO overflow,
//              [6:4] SPI busy (ADC, VCO, DAC)
//  10 EVENTS   triggers seen,  11 DROPPED  triggers with no room in the BRAMs,
//  12 MISSED   crossings while the readout was busy,  13 OVERFLOW  words lost by the
//              ping-pong logic
// A write to an SPI register queues the word; it is sent as soon as that SPI master is
// idle. Writes to RELEASE give a one-clock release pulse.
// The settings (threshold, record length, polarity, DAC tuning, start of triggering)
// are those the paper lists; the addresses, widths and clamping are this design's.
module config_regs
  import digitizer_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              wr_en,
  input  logic [3:0]        wr_addr,
  input  logic [31:0]       wr_data,
  input  logic [3:0]        rd_addr,
  output logic [31:0]       rd_data,
  output cfg_t              cfg,
  // SPI masters: 0 ADC, 1 VCO, 2 DAC
  output logic [2:0]        spi_start,
  output logic [2:0][23:0]  spi_word,
  input  logic [2:0]        spi_busy,
  output logic [1:0]        release_bank,
  // status
  input  logic [1:0]        pp_full,
  input  logic              pp_active,
  input  logic              fifo_overflow,
  input  logic [31:0]       event_no,
  input  logic [31:0]       dropped,
  input  logic [31:0]       missed,
  input  logic [31:0]       pp_overflow
);

  localparam logic [15:0] PRE_MAX = 16'(RING_DEPTH - 16);
  localparam logic [15:0] REC_MAX = 16'(2 * BRAM_WORDS - PKG_OVERHEAD);

  logic [2:0] pending;

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg          <= '{run: 1'b0, polarity_neg: 1'b0, threshold: 12'd2048,
                        pre_len: 16'd16, rec_len: 16'd64, channel: 8'd0};
      spi_word     <= '0;
      spi_start    <= '0;
      pending      <= '0;
      release_bank <= '0;
    end else begin
      release_bank <= '0;
      spi_start    <= '0;
      for (int d = 0; d < 3; d++)
        if (pending[d] && !spi_busy[d] && !spi_start[d]) begin
          spi_start[d] <= 1'b1;
          pending[d]   <= 1'b0;
        end
      if (wr_en) begin
        unique case (wr_addr)
          4'd0: begin
            cfg.run          <= wr_data[0];
            cfg.polarity_neg <= wr_data[1];
          end
          4'd1: cfg.threshold <= wr_data[11:0];
          4'd2: cfg.pre_len   <= (wr_data[15:0] > PRE_MAX) ? PRE_MAX : wr_data[15:0];
          4'd3: cfg.rec_len   <= (wr_data[15:0] == 0) ? 16'd1 :
                                 (wr_data[15:0] > REC_MAX) ? REC_MAX : wr_data[15:0];
          4'd4: cfg.channel   <= wr_data[7:0];
          4'd5, 4'd6, 4'd7: begin
            spi_word[2'(wr_addr - 4'd5)] <= wr_data[23:0];
            pending[2'(wr_addr - 4'd5)]  <= 1'b1;
          end
          4'd8: release_bank <= wr_data[1:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (rd_addr)
      4'd0:    rd_data = {30'd0, cfg.polarity_neg, cfg.run};
      4'd1:    rd_data = {20'd0, cfg.threshold};
      4'd2:    rd_data = {16'd0, cfg.pre_len};
      4'd3:    rd_data = {16'd0, cfg.rec_len};
      4'd4:    rd_data = {24'd0, cfg.channel};
      4'd5:    rd_data = {8'd0, spi_word[0]};
      4'd6:    rd_data = {8'd0, spi_word[1]};
      4'd7:    rd_data = {8'd0, spi_word[2]};
      4'd9:    rd_data = {25'd0, spi_busy, fifo_overflow, pp_active, pp_full};
      4'd10:   rd_data = event_no;
      4'd11:   rd_data = dropped;
      4'd12:   rd_data = missed;
      4'd13:   rd_data = pp_overflow;
      default: rd_data = '0;
    endcase
  end

endmodule
