// digitizer_top: programmable-logic readout chain of the PMT digitizer base.
//
// Data path, as drawn for the firmware: 13 DDR LVDS lanes from the 500 MSPS 12-bit ADC
// -> adc_iddr (1:2, 26 bits at 250 MHz) -> fifo_1to2 (52 bits, crossing to the 125 MHz
// global clock) -> header_stamp (64 bits) -> ring_buffer (1k x 64, written
// circularly). threshold_trigger watches the same words; on a crossing,
// event_packager reads the record from Begin to End out of the ring, frames it with
// event number, channel and time, and pingpong_buffer stores it in one of two 64 KB
// BRAMs, raising a full flag and switching BRAMs when one fills. config_regs holds the
// run settings written by the processor and drives three spi_master instances that
// configure the ADC, the VCO and the DAC.
//
// The processor side (DMA engine, AXI BRAM controllers, processor) is outside this
// module: each BRAM's read port, the full flags and the register port are brought out
// as plain ports. Clocks: adc_clk (ADC data clock, 250 MHz) with adc_rst, and clk
// (125 MHz global clock) with rst; both resets synchronous, active high.
// The chain and its widths follow the paper; the register map, package layout and
// the way missed events are counted are this design's choices.
module digitizer_top
  import digitizer_pkg::*;
(
  // ADC
  input  logic                 adc_clk,
  input  logic                 adc_rst,
  input  logic [LANES-1:0]     adc_ddr,
  // global clock domain
  input  logic                 clk,
  input  logic                 rst,
  // processor register port (GPIO)
  input  logic                 reg_wr_en,
  input  logic [3:0]           reg_wr_addr,
  input  logic [31:0]          reg_wr_data,
  input  logic [3:0]           reg_rd_addr,
  output logic [31:0]          reg_rd_data,
  // ping-pong BRAM read ports (to the AXI BRAM controllers) and full flags
  input  logic [1:0]           bram_rd_en,
  input  logic [1:0][12:0]     bram_rd_addr,
  output word_t [1:0]          bram_rd_data,
  output logic [1:0]           bram_full,
  // SPI to ADC, VCO, DAC (index 0, 1, 2)
  output logic [2:0]           spi_sclk,
  output logic [2:0]           spi_mosi,
  output logic [2:0]           spi_cs_n
);

  localparam int unsigned RAW = $clog2(RING_DEPTH);

  // ---------------- ADC clock domain ----------------
  logic [LANES-1:0] q_rise, q_fall;
  logic             fifo_ovf_adc;

  adc_iddr u_iddr (
    .adc_clk (adc_clk),
    .adc_rst (adc_rst),
    .ddr_in  (adc_ddr),
    .q_rise  (q_rise),
    .q_fall  (q_fall)
  );

  // ---------------- crossing to the global clock ----------------
  logic [DATA_W-1:0] w52;
  logic              w52_valid;

  fifo_1to2 #(.IN_W(2 * LANES)) u_fifo (
    .adc_clk    (adc_clk),
    .adc_rst    (adc_rst),
    .din        ({q_fall, q_rise}),
    .din_valid  (1'b1),
    .overflow   (fifo_ovf_adc),
    .clk        (clk),
    .rst        (rst),
    .dout       (w52),
    .dout_valid (w52_valid)
  );

  logic [1:0] ovf_sync;
  always_ff @(posedge clk) begin
    if (rst) ovf_sync <= '0;
    else     ovf_sync <= {ovf_sync[0], fifo_ovf_adc};
  end

  // ---------------- global clock domain ----------------
  word_t             w64;
  logic              w64_valid;
  logic [TIME_W-1:0] w64_time;

  header_stamp u_hdr (
    .clk        (clk),
    .rst        (rst),
    .din        (w52),
    .din_valid  (w52_valid),
    .dout       (w64),
    .dout_valid (w64_valid),
    .word_time  (w64_time)
  );

  logic [RAW-1:0] ring_wr_ptr;
  logic           ring_rd_en;
  logic [RAW-1:0] ring_rd_addr;
  word_t          ring_rd_data;

  ring_buffer u_ring (
    .clk      (clk),
    .rst      (rst),
    .wr_valid (w64_valid),
    .wr_data  (w64),
    .wr_ptr   (ring_wr_ptr),
    .rd_en    (ring_rd_en),
    .rd_addr  (ring_rd_addr),
    .rd_data  (ring_rd_data)
  );

  cfg_t        cfg;
  logic        pkg_ready;
  logic        trig_valid;
  trig_t       trig;
  logic        stop_valid, stop_seen, missed_pulse;
  logic [15:0] stop_tot;

  threshold_trigger u_trig (
    .clk        (clk),
    .rst        (rst),
    .cfg        (cfg),
    .word_valid (w64_valid),
    .word       (w64),
    .word_addr  (ring_wr_ptr),
    .word_time  (w64_time),
    .pkg_ready  (pkg_ready),
    .trig_valid (trig_valid),
    .trig       (trig),
    .stop_valid (stop_valid),
    .stop_seen  (stop_seen),
    .stop_tot   (stop_tot),
    .missed     (missed_pulse)
  );

  logic [15:0] pp_free;
  logic        pkg_valid;
  word_t       pkg_data;
  logic [31:0] event_no, dropped, missed_cnt, pp_overflow;

  event_packager u_pkg (
    .clk        (clk),
    .rst        (rst),
    .cfg        (cfg),
    .trig_valid (trig_valid),
    .trig       (trig),
    .stop_valid (stop_valid),
    .stop_seen  (stop_seen),
    .stop_tot   (stop_tot),
    .ready      (pkg_ready),
    .wr_ptr     (ring_wr_ptr),
    .rd_en      (ring_rd_en),
    .rd_addr    (ring_rd_addr),
    .rd_data    (ring_rd_data),
    .pp_free    (pp_free),
    .pkg_valid  (pkg_valid),
    .pkg_data   (pkg_data),
    .event_no   (event_no),
    .dropped    (dropped)
  );

  always_ff @(posedge clk) begin
    if (rst)               missed_cnt <= '0;
    else if (missed_pulse) missed_cnt <= missed_cnt + 1'b1;
  end

  logic [1:0] release_bank;
  logic       pp_active;

  // The packager only starts a package that fits, so it never writes into a locked
  // BRAM.
  a_no_write_when_locked: assert property (@(posedge clk) disable iff (rst)
    pkg_valid |-> !bram_full[pp_active]);

  pingpong_buffer u_pp (
    .clk          (clk),
    .rst          (rst),
    .in_valid     (pkg_valid),
    .in_data      (pkg_data),
    .full         (bram_full),
    .active       (pp_active),
    .free_words   (pp_free),
    .release_bank (release_bank),
    .overflow     (pp_overflow),
    .rd_en        (bram_rd_en),
    .rd_addr      (bram_rd_addr),
    .rd_data      (bram_rd_data)
  );

  logic [2:0]       spi_start, spi_busy;
  logic [2:0][23:0] spi_word;

  config_regs u_regs (
    .clk           (clk),
    .rst           (rst),
    .wr_en         (reg_wr_en),
    .wr_addr       (reg_wr_addr),
    .wr_data       (reg_wr_data),
    .rd_addr       (reg_rd_addr),
    .rd_data       (reg_rd_data),
    .cfg           (cfg),
    .spi_start     (spi_start),
    .spi_word      (spi_word),
    .spi_busy      (spi_busy),
    .release_bank  (release_bank),
    .pp_full       (bram_full),
    .pp_active     (pp_active),
    .fifo_overflow (ovf_sync[1]),
    .event_no      (event_no),
    .dropped       (dropped),
    .missed        (missed_cnt),
    .pp_overflow   (pp_overflow)
  );

  for (genvar d = 0; d < 3; d++) begin : g_spi
    spi_master #(.WORD_W(24), .HALF_PERIOD(4)) u_spi (
      .clk   (clk),
      .rst   (rst),
      .start (spi_start[d]),
      .data  (spi_word[d]),
      .busy  (spi_busy[d]),
      .done  (),
      .sclk  (spi_sclk[d]),
      .mosi  (spi_mosi[d]),
      .cs_n  (spi_cs_n[d])
    );
  end

endmodule
