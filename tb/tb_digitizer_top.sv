// tb_digitizer_top: end-to-end test of the readout chain at its default sizes.
//
// The testbench plays the ADC and the processor. As the ADC it produces a 500 MSPS
// 12-bit stream (baseline with noise and exponentially decaying pulses of random
// height, short, long and, now and then, very long decay) and puts it on the 13 DDR
// lanes, one sample per clock edge. Every sample is kept, so that recorded waveforms
// can be compared with what was sent. As the processor it writes the run settings,
// sends one word to each SPI device, and, whenever a BRAM is full, reads its 8192
// words through the read port and releases it. The first release is held back until
// the other BRAM has no room left and events are dropped; after the first BRAM the
// polarity is switched to negative pulses.
//
// The four 64 KB chunks read are parsed as one package stream. Each package must have
// the right framing and event numbers, its samples must equal the sent samples at the
// place its time stamp gives (pre_len words before the crossing), and its first
// sample over threshold must be the one after a sample below it. Mechanisms counted,
// each of which must occur: triggers with positive and with negative polarity, stop
// seen and not seen within the record, missed crossings, dropped events, BRAM full on
// both BRAMs (twice each), running out of room with one BRAM locked, releases, and the
// three SPI transfers.
module tb_digitizer_top;
  import digitizer_pkg::*;

  logic adc_clk = 1'b0, clk = 1'b0, adc_rst = 1'b1, rst = 1'b1;
  logic [LANES-1:0] adc_ddr = '0;
  logic reg_wr_en = 1'b0;
  logic [3:0] reg_wr_addr = '0, reg_rd_addr = '0;
  logic [31:0] reg_wr_data = '0, reg_rd_data;
  logic [1:0] bram_rd_en = '0;
  logic [1:0][12:0] bram_rd_addr = '0;
  word_t [1:0] bram_rd_data;
  logic [1:0] bram_full;
  logic [2:0] spi_sclk, spi_mosi, spi_cs_n;

  digitizer_top dut (.*);

  always #2 adc_clk = ~adc_clk;
  always #4 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- settings ----------------
  localparam int PRE = 8, REC = 40;
  localparam logic [11:0] THR_POS = 12'd1000, THR_NEG = 12'd3000;
  localparam int SPI_ADC = 24'h000820, SPI_VCO = 24'h4FF124, SPI_DAC = 24'h300A5A;

  // ---------------- ADC model ----------------
  logic [12:0] smp [$];          // every sample sent, {over-range, code}
  bit   neg_mode = 1'b0;
  int   switch_at = -1;          // first sample index of negative mode
  real  pulse = 0.0, decay = 0.9;
  int   gap = 200;

  function automatic logic [12:0] next_sample();
    real base, v;
    int code;
    if (gap == 0) begin
      int kind = $urandom_range(0, 99);
      real tau = (kind < 60) ? 10.0 : (kind < 97) ? 40.0 : 600.0;
      pulse += real'($urandom_range(400, 3000));
      decay = $exp(-1.0 / tau);
      gap = (tau > 100.0) ? 1500 :
            ($urandom_range(0, 4) == 0) ? $urandom_range(130, 165) : $urandom_range(180, 500);
    end
    gap--;
    base = neg_mode ? 3700.0 : 300.0;
    v = neg_mode ? base - pulse : base + pulse;
    v += real'($urandom_range(0, 16)) - 8.0;
    pulse *= decay;
    code = int'(v);
    if (code > 4095) return {1'b1, 12'd4095};
    if (code < 0) return {1'b1, 12'd0};
    return {1'b0, 12'(code)};
  endfunction

  initial begin
    logic [12:0] s;
    @(negedge adc_rst);
    forever begin
      @(negedge adc_clk); #1; s = next_sample(); smp.push_back(s); adc_ddr = s;
      @(posedge adc_clk); #1; s = next_sample(); smp.push_back(s); adc_ddr = s;
    end
  end

  // ---------------- SPI devices ----------------
  logic [23:0] spi_rx [3];
  int spi_bits [3] = '{0, 0, 0};
  for (genvar d = 0; d < 3; d++) begin : g_dev
    always @(posedge spi_sclk[d]) if (!spi_cs_n[d]) begin
      spi_rx[d] <= {spi_rx[d][22:0], spi_mosi[d]};
      spi_bits[d] <= spi_bits[d] + 1;
    end
  end

  // ---------------- processor model ----------------
  task automatic reg_wr(input int a, input int unsigned d);
    @(posedge clk); #1 reg_wr_en = 1'b1; reg_wr_addr = 4'(a); reg_wr_data = d;
    @(posedge clk); #1 reg_wr_en = 1'b0;
  endtask

  task automatic reg_rd(input int a, output int unsigned d);
    @(posedge clk); #1 reg_rd_addr = 4'(a); #1 d = reg_rd_data;
  endtask

  word_t stream [$];
  int n_full [2] = '{0, 0};
  int n_no_room = 0, n_release = 0;

  task automatic read_bank(input int b);
    for (int a = 0; a <= BRAM_WORDS; a++) begin
      @(posedge clk); #1;
      if (a > 0) stream.push_back(bram_rd_data[b]);
      bram_rd_en[b] = (a < BRAM_WORDS);
      bram_rd_addr[b] = 13'(a);
    end
    bram_rd_en[b] = 1'b0;
  endtask

  task automatic release_bank(input int b);
    reg_wr(8, 32'(1 << b));
    n_release++;
    @(posedge clk); #1;
    check(!bram_full[b], $sformatf("BRAM %0d unlocked by release", b));
  endtask

  // ---------------- package parser ----------------
  int n_pos = 0, n_neg = 0, n_seen = 0, n_unseen = 0, n_pkg = 0, n_gap = 0;
  int D = 0;
  bit D_known = 1'b0;

  function automatic bit samples_match(int first_word, int off, int p);
    for (int i = 0; i < REC; i++) begin
      word_t w = stream[p + 2 + i];
      for (int j = 0; j < 4; j++) begin
        int idx = 4 * (first_word + i) + j + off;
        logic [12:0] e;
        if (idx < 0 || idx >= smp.size()) return 1'b0;
        e = smp[idx];
        if (w[13*j +: 13] !== e) return 1'b0;
      end
    end
    return 1'b1;
  endfunction

  function automatic bit over_thr(logic [12:0] s, bit neg);
    return neg ? (s[11:0] < THR_NEG) : (s[11:0] > THR_POS);
  endfunction

  task automatic parse();
    int p = 0;
    int last_ev = -1;
    while (p + REC + 3 <= stream.size()) begin
      word_t h0 = stream[p], h1 = stream[p+1], tr = stream[p+REC+2];
      int ev = int'(h0[31:0]);
      longint t = longint'(h1[47:0]);
      int first_word = int'(t >> 2) - PRE;
      bit neg;
      word_t wf, wl;
      int ti;
      logic [12:0] s_at, s_before;
      check(h0[63:56] == PKG_HEAD && h0[47:32] == 16'(REC) && h0[55:48] == 8'h2A &&
            h1[63:48] == 16'(PRE), $sformatf("header of package at word %0d", p));
      if (h0[63:56] != PKG_HEAD) return;
      check(tr[63:56] == PKG_TAIL && tr[31:0] == h0[31:0], $sformatf("trailer of event %0d", ev));
      check(ev > last_ev, "event numbers increase");
      if (last_ev >= 0 && ev != last_ev + 1) n_gap += ev - last_ev - 1;
      last_ev = ev;
      // 12-bit word headers inside the package follow the word count
      wf = stream[p + 2];
      wl = stream[p + REC + 1];
      check(wf[63:52] == 12'(first_word) && wl[63:52] == 12'(first_word + REC - 1),
            "word headers");
      if (!D_known) begin
        for (int off = -64; off <= 64; off++)
          if (samples_match(first_word, off, p)) begin D = off; D_known = 1'b1; break; end
        check(D_known, "first package found in the sent samples");
      end else begin
        check(samples_match(first_word, D, p), $sformatf("samples of event %0d", ev));
      end
      neg = (switch_at >= 0) && (int'(t) + D >= switch_at);
      if (D_known) begin
        ti = int'(t) + D;
        s_at = smp[ti];
        s_before = smp[ti - 1];
        check(over_thr(s_at, neg) && !over_thr(s_before, neg),
              $sformatf("crossing time of event %0d", ev));
      end
      if (neg) n_neg++; else n_pos++;
      if (tr[48]) n_seen++; else n_unseen++;
      n_pkg++;
      p += REC + 3;
    end
  endtask

  // ---------------- main sequence ----------------
  initial begin
    int unsigned v, dropped, missed, events;
    repeat (4) @(posedge clk);
    adc_rst = 1'b0; rst = 1'b0;
    reg_wr(1, THR_POS);
    reg_wr(2, PRE);
    reg_wr(3, REC);
    reg_wr(4, 32'h2A);
    reg_wr(5, SPI_ADC);
    reg_wr(6, SPI_VCO);
    reg_wr(7, SPI_DAC);
    repeat (300) @(posedge clk);
    for (int d = 0; d < 3; d++)
      check(spi_bits[d] == 24, $sformatf("SPI device %0d got %0d bits", d, spi_bits[d]));
    check(spi_rx[0] == 24'(SPI_ADC) && spi_rx[1] == 24'(SPI_VCO) && spi_rx[2] == 24'(SPI_DAC),
          "SPI words received");
    reg_wr(0, 32'h1);                         // start triggering
    // chunk 1: BRAM 0
    while (!bram_full[0]) @(posedge clk);
    n_full[0]++;
    read_bank(0);
    // switch to negative pulses
    reg_wr(0, 32'h0);
    reg_wr(1, THR_NEG);
    repeat (20) @(posedge clk);
    neg_mode = 1'b1;
    switch_at = smp.size();
    repeat (400) @(posedge clk);
    reg_wr(0, 32'h3);
    // chunk 2: BRAM 1. BRAM 0 stays locked until BRAM 1 has no room for another
    // package and events are being dropped; only then is it released, after which
    // the package that did not fit spills over into BRAM 0 and BRAM 1 fills.
    dropped = 0;
    while (dropped < 10) begin
      repeat (200) @(posedge clk);
      reg_rd(11, dropped);
    end
    check(bram_full == 2'b01, "BRAM 0 still locked while dropping");
    n_no_room++;
    release_bank(0);
    while (!bram_full[1]) @(posedge clk);
    n_full[1]++;
    read_bank(1);
    release_bank(1);
    // chunks 3 and 4
    while (!bram_full[0]) @(posedge clk);
    n_full[0]++;
    read_bank(0);
    release_bank(0);
    while (!bram_full[1]) @(posedge clk);
    n_full[1]++;
    read_bank(1);
    release_bank(1);
    reg_rd(9, v);
    check(v[3] == 1'b0, "no ADC FIFO overflow");
    reg_rd(10, events);
    reg_rd(11, dropped);
    reg_rd(12, missed);
    parse();
    $display("packages %0d (positive %0d, negative %0d), stop seen %0d / not seen %0d",
             n_pkg, n_pos, n_neg, n_seen, n_unseen);
    $display("events %0d, dropped %0d (gaps in stream %0d), missed %0d, offset %0d",
             events, dropped, n_gap, missed, D);
    $display("BRAM full %0d/%0d, out of room %0d, releases %0d", n_full[0], n_full[1],
             n_no_room, n_release);
    check(n_pkg >= 4 * BRAM_WORDS / (REC + 3) - 4, "packages fill four BRAMs");
    check(n_gap <= int'(dropped), "stream gaps are dropped events");
    // every mechanism happened at least once
    check(n_pos > 0, "positive-polarity triggers");
    check(n_neg > 0, "negative-polarity triggers");
    check(n_seen > 0, "Threshold_stop inside the record");
    check(n_unseen > 0, "pulse longer than the record");
    check(missed > 0, "crossings missed while the readout was busy");
    check(dropped > 0 && n_gap > 0, "events dropped for lack of BRAM room");
    check(n_full[0] >= 2 && n_full[1] >= 2, "both BRAMs filled twice");
    check(n_no_room > 0, "no room left with one BRAM locked");
    check(n_release == 4, "BRAM releases");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
