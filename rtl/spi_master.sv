// spi_master: write-only SPI master for the configuration of the ADC, the VCO and the
// DAC.
//
// A start pulse loads a WORD_W-bit word, which is shifted out MSB first in SPI mode 0:
// cs_n goes low, mosi changes after each falling edge of sclk and is stable at each
// rising edge, where the device samples it. sclk runs at clk / (2*HALF_PERIOD). After
// the last bit cs_n returns high half a period later, which also serves as the latch
// pulse of devices with a load-enable input, and done pulses for one clock. busy is
// high from start to done; a start while busy is ignored.
//
// The paper says only that the three devices are configured over SPI; the word
// length (24 bits fits all three parts), mode 0, the clock rate and the write-only
// use are this design's choices.
module spi_master #(
  parameter int unsigned WORD_W      = 24,
  parameter int unsigned HALF_PERIOD = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic [WORD_W-1:0] data,
  output logic              busy,
  output logic              done,
  output logic              sclk,
  output logic              mosi,
  output logic              cs_n
);

  localparam int unsigned DW = $clog2(HALF_PERIOD + 1);
  localparam int unsigned BW = $clog2(WORD_W + 1);

  typedef enum logic [1:0] {IDLE, SHIFT, FINISH} state_t;
  state_t state;

  logic [WORD_W-1:0] shreg;
  logic [DW-1:0]     div;
  logic [BW-1:0]     bits_left;
  logic              tick;

  assign tick = (div == DW'(HALF_PERIOD - 1));
  assign busy = (state != IDLE);
  assign mosi = shreg[WORD_W-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= IDLE;
      shreg     <= '0;
      div       <= '0;
      bits_left <= '0;
      sclk      <= 1'b0;
      cs_n      <= 1'b1;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      div  <= (state == IDLE || tick) ? '0 : div + 1'b1;
      unique case (state)
        IDLE: if (start) begin
          shreg     <= data;
          bits_left <= BW'(WORD_W);
          cs_n      <= 1'b0;
          sclk      <= 1'b0;
          state     <= SHIFT;
        end
        SHIFT: if (tick) begin
          sclk <= ~sclk;
          if (sclk) begin            // falling edge: next bit
            shreg <= {shreg[WORD_W-2:0], 1'b0};
            if (bits_left == 1) state <= FINISH;
            bits_left <= bits_left - 1'b1;
          end
        end
        FINISH: if (tick) begin
          cs_n  <= 1'b1;
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
