// tb_event_packager: a model ring buffer (written one word per clock, word = its
// write count) feeds the packager. For each trigger the testbench checks the whole
// package: header 0 (marker, channel, length, event number), header 1 (pre_len, time),
// the rec_len ring words from Begin to End in order, and the trailer with the stop
// information. It also checks that a trigger is dropped and counted when pp_free is
// too small, that event numbers count dropped events too, that the packager is busy
// while sending, and that a package of rec_len words takes rec_len + 3 words of output.
module tb_event_packager;
  import digitizer_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  cfg_t cfg;
  logic trig_valid = 1'b0, stop_valid = 1'b0, stop_seen = 1'b0;
  trig_t trig = '0;
  logic [15:0] stop_tot = '0, pp_free = 16'd16384;
  logic ready, rd_en, pkg_valid;
  logic [9:0] wr_ptr = '0, rd_addr;
  word_t rd_data = '0, pkg_data;
  logic [31:0] event_no, dropped;
  int checks = 0, failures = 0;
  word_t ring [1024];
  int unsigned wcount = 0;
  word_t got [$];

  event_packager dut (.*);

  always #4 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model ring: written every clock; port B with one clock latency
  always @(posedge clk) begin
    if (!rst) begin
      ring[wr_ptr] <= {32'hCAFE0000, 32'(wcount)};
      wr_ptr <= wr_ptr + 1'b1;
      wcount <= wcount + 1;
    end
    if (rd_en) rd_data <= ring[rd_addr];
    if (pkg_valid) got.push_back(pkg_data);
  end

  task automatic fire(input int unsigned start_cnt, input int unsigned t, input int tot, input bit seen);
    @(posedge clk); #1;
    trig_valid = 1'b1;
    trig.start_addr = 10'(start_cnt % 1024);
    trig.begin_addr = 10'((start_cnt - cfg.pre_len) % 1024);
    trig.start_time = TIME_W'(t);
    @(posedge clk); #1;
    trig_valid = 1'b0;
    repeat (3) @(posedge clk);
    #1 stop_valid = 1'b1; stop_tot = 16'(tot); stop_seen = seen;
    @(posedge clk); #1 stop_valid = 1'b0;
  endtask

  task automatic check_pkg(input int unsigned start_cnt, input int unsigned t, input int evno,
                           input int tot, input bit seen);
    int unsigned b;
    int n;
    word_t last;
    b = start_cnt - cfg.pre_len;
    n = int'(cfg.rec_len);
    checks++;
    if (got.size() != int'(cfg.rec_len) + 3) begin
      failures++; $display("package of %0d words, expected %0d", got.size(), cfg.rec_len + 3);
      got.delete();
      return;
    end
    checks++;
    if (got[0] !== {8'hA5, cfg.channel, cfg.rec_len, 32'(evno)}) begin
      failures++; $display("header0 %h", got[0]);
    end
    checks++;
    if (got[1] !== {cfg.pre_len, 48'(t)}) begin failures++; $display("header1 %h", got[1]); end
    for (int i = 0; i < int'(cfg.rec_len); i++) begin
      checks++;
      if (got[2+i] !== {32'hCAFE0000, 32'(b + i)}) begin
        failures++; $display("sample word %0d: %h expected count %0d", i, got[2+i], b + i);
      end
    end
    last = got[n + 2];
    checks++;
    if (last !== {8'hE5, 7'b0, seen, 16'(tot), 32'(evno)}) begin
      failures++; $display("trailer %h", last);
    end
    got.delete();
  endtask

  initial begin
    int unsigned s;
    int busy_cycles;
    cfg = '{run: 1'b1, polarity_neg: 1'b0, threshold: 12'd1000, pre_len: 16'd20,
            rec_len: 16'd50, channel: 8'h5C};
    repeat (3) @(posedge clk);
    rst = 1'b0;
    repeat (100) @(posedge clk);
    // event 0
    s = wcount - 1;
    fire(s, 4 * s + 2, 7, 1'b1);
    busy_cycles = 0;
    while (!ready) begin @(posedge clk); busy_cycles++; end
    repeat (2) @(posedge clk);
    check_pkg(s, 4 * s + 2, 0, 7, 1'b1);
    checks++;
    if (busy_cycles < 50 || busy_cycles > 60) begin
      failures++; $display("busy for %0d cycles", busy_cycles);
    end
    // event 1: not enough room -> dropped
    pp_free = 16'd52;
    repeat (10) @(posedge clk);
    s = wcount - 1;
    fire(s, 4 * s, 3, 1'b1);
    repeat (80) @(posedge clk);
    checks++;
    if (got.size() != 0 || dropped != 1 || event_no != 2) begin
      failures++; $display("drop: %0d words, dropped %0d, events %0d", got.size(), dropped, event_no);
    end
    got.delete();
    // event 2: room exactly rec_len + 3, longer record wrapping the ring, stop not seen
    pp_free = 16'd53;
    repeat (997) @(posedge clk);
    s = wcount - 1;
    fire(s, 4 * s + 1, 50, 1'b0);
    while (!ready) @(posedge clk);
    repeat (2) @(posedge clk);
    check_pkg(s, 4 * s + 1, 2, 50, 1'b0);
    // event 3: pre_len 0, record length 1
    cfg.pre_len = 16'd0; cfg.rec_len = 16'd1;
    pp_free = 16'd16384;
    repeat (5) @(posedge clk);
    s = wcount - 1;
    fire(s, 4 * s + 3, 1, 1'b1);
    while (!ready) @(posedge clk);
    repeat (2) @(posedge clk);
    check_pkg(s, 4 * s + 3, 3, 1, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
