// threshold_trigger: threshold triggering on the sample stream entering the ring buffer.
//
// Every word written into the ring buffer carries four samples. A sample is "over
// threshold" when its 12-bit code is above cfg.threshold (positive polarity) or below
// it (cfg.polarity_neg). The trigger marks, in ring-buffer addresses, the four points
// the paper draws on the ring: Threshold_start (first word with a sample over
// threshold), Begin (cfg.pre_len words earlier), Threshold_stop (first later word with
// no sample over threshold) and End (Begin + cfg.rec_len - 1).
//
// States: ARMED waits for a crossing; OVER follows the pulse until Threshold_stop;
// TAIL waits until End has been written; BLOCKED waits for the signal to drop below
// threshold again. A crossing seen while the packager is not ready (pkg_ready low),
// or before pre_len words have been written since run was set, is counted on missed
// and no record is made. A pulse still over threshold at End gives stop_seen = 0.
//
// Interface: word_* is the word being written this cycle and its address; trig_valid
// pulses one clock after the Threshold_start word with Begin, Threshold_start and the
// sample time of the first sample over threshold; stop_valid pulses once per record
// with the time over threshold in words (Threshold_stop - Threshold_start).
// Threshold, polarity and record length as settings come from the paper; the state
// machine, the re-arm rule and the missed-event rule are this design's choices.
module threshold_trigger
  import digitizer_pkg::*;
#(
  parameter int unsigned AW = RING_AW
) (
  input  logic              clk,
  input  logic              rst,
  input  cfg_t              cfg,
  input  logic              word_valid,
  input  word_t             word,
  input  logic [AW-1:0]     word_addr,
  input  logic [TIME_W-1:0] word_time,
  input  logic              pkg_ready,
  output logic              trig_valid,
  output trig_t             trig,
  output logic              stop_valid,
  output logic              stop_seen,
  output logic [15:0]       stop_tot,
  output logic              missed
);

  typedef enum logic [1:0] {ARMED, OVER, TAIL, BLOCKED} state_t;
  state_t state;

  logic [SAMPLES_PER_WORD-1:0] over;
  logic                        any_over;
  logic [1:0]                  first_idx;
  logic [15:0]                 wcnt;      // words since Begin, this one included
  logic [15:0]                 tot;       // words since Threshold_start
  logic [15:0]                 fill;      // words written since run was set
  logic                        filled;

  always_comb begin
    first_idx = '0;
    for (int i = SAMPLES_PER_WORD - 1; i >= 0; i--) begin
      logic [SAMPLE_W-1:0] s;
      s       = sample_code(word[DATA_W-1:0], i);
      over[i] = cfg.polarity_neg ? (s < cfg.threshold) : (s > cfg.threshold);
      if (over[i]) first_idx = 2'(i);
    end
    any_over = |over;
    filled   = (fill >= cfg.pre_len);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= ARMED;
      trig_valid <= 1'b0;
      trig       <= '0;
      stop_valid <= 1'b0;
      stop_seen  <= 1'b0;
      stop_tot   <= '0;
      missed     <= 1'b0;
      wcnt       <= '0;
      tot        <= '0;
      fill       <= '0;
    end else begin
      trig_valid <= 1'b0;
      stop_valid <= 1'b0;
      missed     <= 1'b0;
      if (!cfg.run) begin
        // a record cut short by clearing run still gets its stop mark
        if (state == OVER) begin
          stop_valid <= 1'b1;
          stop_seen  <= 1'b0;
          stop_tot   <= tot;
        end
        state <= ARMED;
        fill  <= '0;
      end else if (word_valid) begin
        if (fill != '1) fill <= fill + 1'b1;
        wcnt <= wcnt + 1'b1;
        tot  <= tot + 1'b1;
        unique case (state)
          ARMED: if (any_over) begin
            if (pkg_ready && filled) begin
              trig_valid       <= 1'b1;
              trig.begin_addr  <= RING_AW'(word_addr - AW'(cfg.pre_len));
              trig.start_addr  <= RING_AW'(word_addr);
              trig.start_time  <= {word_time[TIME_W-3:0], first_idx};
              wcnt             <= cfg.pre_len + 16'd1;
              tot              <= 16'd1;
              state            <= (cfg.pre_len + 16'd1 >= cfg.rec_len) ? BLOCKED : OVER;
              if (cfg.pre_len + 16'd1 >= cfg.rec_len) begin
                stop_valid <= 1'b1;
                stop_seen  <= 1'b0;
                stop_tot   <= 16'd1;
              end
            end else begin
              missed <= 1'b1;
              state  <= BLOCKED;
            end
          end
          OVER: begin
            if (!any_over) begin
              stop_valid <= 1'b1;
              stop_seen  <= 1'b1;
              stop_tot   <= tot;
              state      <= (wcnt + 16'd1 >= cfg.rec_len) ? ARMED : TAIL;
            end else if (wcnt + 16'd1 >= cfg.rec_len) begin
              stop_valid <= 1'b1;
              stop_seen  <= 1'b0;
              stop_tot   <= tot + 16'd1;
              state      <= BLOCKED;
            end
          end
          TAIL: if (wcnt + 16'd1 >= cfg.rec_len) state <= ARMED;
          BLOCKED: if (!any_over) state <= ARMED;
        endcase
      end
    end
  end

endmodule
