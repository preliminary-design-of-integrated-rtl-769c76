// event_packager: turns a trigger into a data package and streams it to the ping-pong
// logic.
//
// On trig_valid the packager checks that the ping-pong BRAMs have room for the whole
// package (cfg.rec_len samples words plus three framing words, pp_free); if not, the
// event is dropped and counted. Otherwise it sends, one 64-bit word per clock:
//   header 0 : {8'hA5, channel[7:0], rec_len[15:0], event_no[31:0]}
//   header 1 : {pre_len[15:0], start_time[47:0]}   (time in 2 ns samples)
//   rec_len ring-buffer words, Begin to End, unchanged
//   trailer  : {8'hE5, 7'b0, stop_seen, time_over_threshold[15:0], event_no[31:0]}
// Ring words are read through port B one clock ahead of use. A word is read only after
// it has been written (its address differs from the ring's write pointer); since the
// ring is written at most once per clock and read at most once per clock, the reader
// keeps a constant distance behind the writer and is never overtaken as long as
// pre_len + 3 is below the ring depth. event_no counts every trigger, recorded or
// dropped, so gaps in the numbers show lost events.
//
// ready is high while the packager is idle; the trigger only starts an event then.
// The package fields (event time, channel, event number) are those the paper lists;
// their layout, the trailer and the room check are this design's choices.
module event_packager
  import digitizer_pkg::*;
#(
  parameter int unsigned AW = RING_AW
) (
  input  logic          clk,
  input  logic          rst,
  input  cfg_t          cfg,
  // from the trigger
  input  logic          trig_valid,
  input  trig_t         trig,
  input  logic          stop_valid,
  input  logic          stop_seen,
  input  logic [15:0]   stop_tot,
  output logic          ready,
  // ring buffer port B
  input  logic [AW-1:0] wr_ptr,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  word_t         rd_data,
  // to the ping-pong logic
  input  logic [15:0]   pp_free,
  output logic          pkg_valid,
  output word_t         pkg_data,
  // status
  output logic [31:0]   event_no,
  output logic [31:0]   dropped
);

  typedef enum logic [2:0] {IDLE, HEAD0, HEAD1, DATA, TAIL} state_t;
  state_t state;

  logic [15:0]       rec_len_q, pre_len_q;
  logic [7:0]        channel_q;
  logic [TIME_W-1:0] time_q;
  logic [31:0]       evno_q;
  logic [AW-1:0]     cur;        // next ring address to read
  logic [15:0]       to_read;    // ring words still to read
  logic [15:0]       to_send;    // ring words still to send
  logic              rd_pending; // a read was issued last clock
  logic              stop_got, stop_seen_q;
  logic [15:0]       tot_q;
  logic              can_read;

  assign ready    = (state == IDLE);
  assign can_read = (state == DATA) && (to_read != 0) && (cur != wr_ptr);
  assign rd_en    = can_read;
  assign rd_addr  = cur;

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= IDLE;
      rec_len_q   <= '0;
      pre_len_q   <= '0;
      channel_q   <= '0;
      time_q      <= '0;
      evno_q      <= '0;
      cur         <= '0;
      to_read     <= '0;
      to_send     <= '0;
      rd_pending  <= 1'b0;
      stop_got    <= 1'b0;
      stop_seen_q <= 1'b0;
      tot_q       <= '0;
      pkg_valid   <= 1'b0;
      pkg_data    <= '0;
      event_no    <= '0;
      dropped     <= '0;
    end else begin
      pkg_valid  <= 1'b0;
      rd_pending <= can_read;
      if (stop_valid && state != IDLE) begin
        stop_got    <= 1'b1;
        stop_seen_q <= stop_seen;
        tot_q       <= stop_tot;
      end
      unique case (state)
        IDLE: if (trig_valid) begin
          event_no <= event_no + 1'b1;
          if ({1'b0, pp_free} >= {1'b0, cfg.rec_len} + 17'(PKG_OVERHEAD)) begin
            rec_len_q <= cfg.rec_len;
            pre_len_q <= cfg.pre_len;
            channel_q <= cfg.channel;
            time_q    <= trig.start_time;
            evno_q    <= event_no;
            cur       <= AW'(trig.begin_addr);
            to_read   <= cfg.rec_len;
            to_send   <= cfg.rec_len;
            stop_got    <= stop_valid;
            stop_seen_q <= stop_seen;
            tot_q       <= stop_tot;
            state       <= HEAD0;
          end else begin
            dropped <= dropped + 1'b1;
          end
        end
        HEAD0: begin
          pkg_valid <= 1'b1;
          pkg_data  <= {PKG_HEAD, channel_q, rec_len_q, evno_q};
          state     <= HEAD1;
        end
        HEAD1: begin
          pkg_valid <= 1'b1;
          pkg_data  <= {pre_len_q, time_q};
          state     <= DATA;
        end
        DATA: begin
          if (can_read) begin
            cur     <= cur + 1'b1;
            to_read <= to_read - 1'b1;
          end
          if (rd_pending) begin
            pkg_valid <= 1'b1;
            pkg_data  <= rd_data;
            to_send   <= to_send - 1'b1;
          end
          if (to_send == 0 || (to_send == 1 && rd_pending)) state <= TAIL;
        end
        TAIL: if (stop_got || stop_valid) begin
          pkg_valid <= 1'b1;
          pkg_data  <= stop_valid ? {PKG_TAIL, 7'b0, stop_seen, stop_tot, evno_q}
                                  : {PKG_TAIL, 7'b0, stop_seen_q, tot_q, evno_q};
          state     <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
