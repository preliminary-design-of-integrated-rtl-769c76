// adc_iddr: 1:2 input DDR deserializer for the ADC's LVDS lanes.
//
// Each lane carries one bit of every sample at 500 Mb/s, DDR on a 250 MHz clock:
// the bit of sample 2k is valid at the rising edge, the bit of sample 2k+1 at the
// following falling edge. The module behaves like the IDDR primitive in
// SAME_EDGE_PIPELINED mode, as the paper uses it: the rising-edge bit is delayed by
// one extra register, so that both bits of a pair appear together on the next
// rising edge. q_rise holds the earlier sample, q_fall the later one.
//
// Timing: a pair launched around rising edge k and the following falling edge is
// presented at the outputs after rising edge k+1 (one clock of latency).
// adc_rst is synchronous and clears the outputs.
// The 13 lanes and the 1:2 ratio follow the paper; the bit-to-sample assignment is
// this design's choice.
module adc_iddr #(
  parameter int unsigned LANES = digitizer_pkg::LANES
) (
  input  logic             adc_clk,
  input  logic             adc_rst,
  input  logic [LANES-1:0] ddr_in,
  output logic [LANES-1:0] q_rise,
  output logic [LANES-1:0] q_fall
);

  logic [LANES-1:0] rise_r;   // captured on the rising edge
  logic [LANES-1:0] fall_r;   // captured on the falling edge

  always_ff @(posedge adc_clk) begin
    if (adc_rst) rise_r <= '0;
    else         rise_r <= ddr_in;
  end

  always_ff @(negedge adc_clk) begin
    if (adc_rst) fall_r <= '0;
    else         fall_r <= ddr_in;
  end

  // Same-edge pipelined output stage.
  always_ff @(posedge adc_clk) begin
    if (adc_rst) begin
      q_rise <= '0;
      q_fall <= '0;
    end else begin
      q_rise <= rise_r;
      q_fall <= fall_r;
    end
  end

endmodule
