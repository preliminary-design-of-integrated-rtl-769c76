// tb_threshold_trigger: a scripted sample stream (baseline with pulses) checks every
// trigger mechanism: a positive pulse (Begin, Threshold_start, sample time, time over
// threshold), a pulse inside a running record (no new trigger), a pulse longer than
// the record (stop not seen, re-arm only after the signal drops), a switch to negative
// polarity, a crossing while the packager is busy and a crossing before pre_len words
// have been written (both missed). Each trigger must come exactly one clock after its
// Threshold_start word.
module tb_threshold_trigger;
  import digitizer_pkg::*;
  localparam int NW = 450;
  logic clk = 1'b0, rst = 1'b1;
  cfg_t cfg;
  logic word_valid = 1'b0, pkg_ready = 1'b1;
  word_t word = '0;
  logic [9:0] word_addr = '0;
  logic [TIME_W-1:0] word_time = '0;
  logic trig_valid, stop_valid, stop_seen, missed;
  trig_t trig;
  logic [15:0] stop_tot;
  int checks = 0, failures = 0;
  logic [11:0] smp [4*NW];

  threshold_trigger dut (.*);

  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(input int w, input int idx, input int nwords, input logic [11:0] v);
    for (int s = 4 * w + idx; s < 4 * (w + nwords); s++) smp[s] = v;
  endtask

  // expected triggers: start word, start index, expected stop_tot, stop_seen
  int exp_start [$] = '{50, 80, 150, 225, 300, 390};
  int exp_idx   [$] = '{2, 0, 1, 3, 1, 0};
  int exp_tot   [$] = '{5, 1, 24, 1, 3, 1};
  int exp_seen  [$] = '{1, 1, 0, 1, 1, 1};
  int ntrig = 0, nstop = 0, nmissed = 0;
  int last_word = -1;

  always @(posedge clk) begin
    #1;
    if (trig_valid) begin
      checks++;
      if (ntrig >= exp_start.size()) begin
        failures++; $display("unexpected trigger at word %0d", trig.start_addr);
      end else begin
        automatic int w = exp_start[ntrig];
        if (trig.start_addr !== 10'(w) || trig.begin_addr !== 10'(w - int'(cfg.pre_len)) ||
            trig.start_time !== TIME_W'(4 * w + exp_idx[ntrig]) || last_word != w) begin
          failures++;
          $display("trigger %0d: start %0d begin %0d time %0d (word now %0d)", ntrig,
                   trig.start_addr, trig.begin_addr, trig.start_time, last_word);
        end
      end
      ntrig++;
    end
    if (stop_valid) begin
      checks++;
      if (nstop >= exp_tot.size() || stop_tot !== 16'(exp_tot[nstop]) ||
          stop_seen !== 1'(exp_seen[nstop])) begin
        failures++; $display("stop %0d: tot %0d seen %0d", nstop, stop_tot, stop_seen);
      end
      nstop++;
    end
    if (missed) nmissed++;
  end

  initial begin
    for (int s = 0; s < 4 * NW; s++) smp[s] = (s < 4 * 258) ? 12'd100 + 12'($urandom_range(0, 20))
                                                         : 12'd3000 - 12'($urandom_range(0, 20));
    pulse(50, 2, 5, 12'd1500);
    pulse(60, 0, 2, 12'd1800);     // inside the first record
    pulse(80, 0, 1, 12'd1100);
    pulse(150, 1, 71, 12'd2500);   // longer than the record
    pulse(225, 3, 1, 12'd1200);
    pulse(300, 1, 3, 12'd500);     // negative polarity from here on
    pulse(335, 0, 2, 12'd400);     // packager busy
    pulse(373, 0, 1, 12'd400);     // ring not yet filled after run restart
    pulse(390, 0, 1, 12'd400);
    cfg = '{run: 1'b1, polarity_neg: 1'b0, threshold: 12'd1000, pre_len: 16'd8,
            rec_len: 16'd32, channel: 8'd3};
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int w = 0; w < NW; w++) begin
      @(posedge clk); #2;
      last_word = w;
      if (w == 258) begin cfg.polarity_neg = 1'b1; cfg.threshold = 12'd2000; end
      pkg_ready = !(w >= 330 && w <= 340);
      cfg.run   = !(w >= 360 && w < 370);
      word_valid = 1'b1;
      word_addr  = 10'(w);
      word_time  = TIME_W'(w);
      word = {12'(w), 1'b0, smp[4*w+3], 1'b0, smp[4*w+2], 1'b0, smp[4*w+1], 1'b0, smp[4*w]};
    end
    @(posedge clk); #2 word_valid = 1'b0;
    repeat (3) @(posedge clk);
    checks++;
    if (ntrig != exp_start.size() || nstop != exp_tot.size() || nmissed != 2) begin
      failures++;
      $display("counts: %0d triggers, %0d stops, %0d missed", ntrig, nstop, nmissed);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
