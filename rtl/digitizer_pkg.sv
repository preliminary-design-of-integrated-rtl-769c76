// digitizer_pkg: widths, sizes and shared types of the PMT digitizer readout chain.
//
// One ADC sample is 13 bits: a 12-bit code (bits 11:0, offset binary) and the ADC
// over-range bit (bit 12), one bit per LVDS lane. Four consecutive samples make a
// 52-bit word at the 125 MHz global clock; a 12-bit header in bits 63:52 turns it
// into the 64-bit ring-buffer word. Sample 0, the earliest, sits in bits 12:0.
// The 13 lanes, the 26/52/64-bit widths, the 1k-deep ring buffer and the 64 KB
// ping-pong BRAMs are the paper's numbers; the meaning of the 13th lane, the sample
// order, the header contents and the package layout are this design's choices.
package digitizer_pkg;

  localparam int unsigned LANES        = 13;   // DDR LVDS lanes from the ADC
  localparam int unsigned SAMPLE_W     = 12;   // ADC resolution
  localparam int unsigned SAMPLES_PER_WORD = 4;
  localparam int unsigned DATA_W       = LANES * SAMPLES_PER_WORD; // 52
  localparam int unsigned HDR_W        = 12;   // 64 - 52
  localparam int unsigned WORD_W       = 64;
  localparam int unsigned RING_DEPTH   = 1024;
  localparam int unsigned RING_AW      = $clog2(RING_DEPTH);
  localparam int unsigned BRAM_BYTES   = 65536;
  localparam int unsigned BRAM_WORDS   = BRAM_BYTES / (WORD_W / 8); // 8192
  localparam int unsigned TIME_W       = 48;   // word-time counter width

  // Package word markers (bits 63:56 of the first and last word of an event).
  localparam logic [7:0] PKG_HEAD = 8'hA5;
  localparam logic [7:0] PKG_TAIL = 8'hE5;
  // Words added to the samples of each event: two header words and one trailer.
  localparam int unsigned PKG_OVERHEAD = 3;

  typedef logic [WORD_W-1:0] word_t;

  // Run settings written by the processor.
  typedef struct packed {
    logic        run;           // triggering enabled
    logic        polarity_neg;  // 1: negative-going pulses (sample below threshold)
    logic [11:0] threshold;     // ADC code
    logic [15:0] pre_len;       // words kept before the Threshold_start word
    logic [15:0] rec_len;       // record length in words, Begin..End inclusive
    logic [7:0]  channel;       // channel number stamped into each package
  } cfg_t;

  // Event marks produced by the trigger at Threshold_start.
  typedef struct packed {
    logic [RING_AW-1:0] begin_addr; // first word of the record (ring address)
    logic [RING_AW-1:0] start_addr; // word holding the first sample over threshold
    logic [TIME_W-1:0]  start_time; // sample time of the first sample over threshold
  } trig_t;

  function automatic logic [SAMPLE_W-1:0] sample_code(input logic [DATA_W-1:0] d, input int i);
    return d[i*LANES +: SAMPLE_W];
  endfunction

endpackage
