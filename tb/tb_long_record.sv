// tb_long_record: records of the lengths used for the pulse-integral measurements,
// 20 us (2500 words = 10000 samples) and then 12 us (1500 words), run through the
// whole chain at its default sizes. Both are longer than the 1024-word ring buffer, so
// this checks that the packager reads the ring while it is still being written.
//
// The ADC model sends pulses with the fitted CLYC shapes (sum of exponentials,
// gamma: 0.53 e^(-t/49ns) + 0.20 e^(-t/668ns) + 0.07 e^(-t/1141ns) + 0.18 e^(-t/5929ns);
// neutron: 0.40 e^(-t/599ns) + 0.21 e^(-t/1339ns) + 0.41 e^(-t/6173ns)), with a 10 ns
// rise, alternating gamma and neutron, 30 us apart. The processor model reads each
// full BRAM and releases it. Every package must have the requested length and carry
// exactly the samples sent. From each waveform the testbench forms the short gate
// Q_S (100 ns from the crossing) and the long gate Q_L (the following 1000 ns) and
// checks that the ratio Q_L / (Q_S + Q_L) separates neutrons from gammas.
module tb_long_record;
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
    #3ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int PRE = 32;
  localparam int BASE = 200;
  localparam logic [11:0] THR = 12'd500;

  // ---------------- ADC model ----------------
  logic [12:0] smp [$];
  int kind_at [$];               // sample index of each pulse start
  bit kind_n [$];                // 1 = neutron
  int t_since = 20000;
  bit cur_n = 1'b1;
  real amp = 0.0;

  function automatic logic [12:0] next_sample();
    real t, y, v;
    int code;
    if (t_since >= 15000) begin          // 30 us between pulses
      t_since = 0;
      cur_n = !cur_n;
      amp = real'($urandom_range(1500, 3000));
      kind_at.push_back(smp.size());
      kind_n.push_back(cur_n);
    end
    t = 2.0 * real'(t_since);           // ns
    if (cur_n) y = 0.40 * $exp(-t / 599.0) + 0.21 * $exp(-t / 1339.0) + 0.41 * $exp(-t / 6173.0);
    else       y = 0.53 * $exp(-t / 49.0) + 0.20 * $exp(-t / 668.0) + 0.07 * $exp(-t / 1141.0) +
                   0.18 * $exp(-t / 5929.0);
    y *= (1.0 - $exp(-t / 10.0));
    v = real'(BASE) + amp * y + real'($urandom_range(0, 6)) - 3.0;
    t_since++;
    code = int'(v);
    if (code > 4095) return {1'b1, 12'd4095};
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

  // ---------------- processor model ----------------
  task automatic reg_wr(input int a, input int unsigned d);
    @(posedge clk); #1 reg_wr_en = 1'b1; reg_wr_addr = 4'(a); reg_wr_data = d;
    @(posedge clk); #1 reg_wr_en = 1'b0;
  endtask

  word_t stream [$];

  task automatic read_bank(input int b);
    for (int a = 0; a <= BRAM_WORDS; a++) begin
      @(posedge clk); #1;
      if (a > 0) stream.push_back(bram_rd_data[b]);
      bram_rd_en[b] = (a < BRAM_WORDS);
      bram_rd_addr[b] = 13'(a);
    end
    bram_rd_en[b] = 1'b0;
    reg_wr(8, 32'(1 << b));
  endtask

  // ---------------- parser ----------------
  int D = 0;
  bit D_known = 1'b0;
  int n_20 = 0, n_12 = 0, n_psd = 0;
  real r_n_min = 1.0, r_g_max = 0.0;

  function automatic logic [12:0] sample_of(int p, int k);
    word_t w = stream[p + 2 + k / 4];
    return w[13 * (k % 4) +: 13];
  endfunction

  function automatic bit match(int p, int len, int first_word, int off);
    for (int k = 0; k < 4 * len; k++) begin
      int idx = 4 * first_word + k + off;
      logic [12:0] e, g;
      if (idx < 0 || idx >= smp.size()) return 1'b0;
      e = smp[idx];
      g = sample_of(p, k);
      if (g !== e) return 1'b0;
    end
    return 1'b1;
  endfunction

  task automatic parse();
    int p = 0;
    while (p + 2 < stream.size()) begin
      word_t h0 = stream[p], h1 = stream[p+1], tr;
      int len = int'(h0[47:32]);
      longint t = longint'(h1[47:0]);
      int first_word = int'(t >> 2) - PRE;
      int k0, ti, last_start;
      real qs, ql, ratio;
      bit is_n;
      if (p + len + 3 > stream.size()) break;
      tr = stream[p + len + 2];
      check(h0[63:56] == PKG_HEAD && tr[63:56] == PKG_TAIL && tr[31:0] == h0[31:0],
            $sformatf("framing of package at %0d", p));
      if (h0[63:56] != PKG_HEAD) return;
      check(len == 2500 || len == 1500, $sformatf("record length %0d", len));
      if (len == 2500) n_20++; else n_12++;
      if (!D_known) begin
        for (int off = -64; off <= 64; off++)
          if (match(p, len, first_word, off)) begin D = off; D_known = 1'b1; break; end
        check(D_known, "first record found in the sent samples");
      end else begin
        check(match(p, len, first_word, D), $sformatf("samples of event %0d", h0[31:0]));
      end
      // PSD gates from the crossing sample
      k0 = int'(t) - 4 * first_word;      // crossing, in samples from the record start
      qs = 0.0; ql = 0.0;
      for (int k = k0; k < k0 + 50; k++) qs += real'(sample_of(p, k) & 13'hFFF) - real'(BASE);
      for (int k = k0 + 50; k < k0 + 550; k++) ql += real'(sample_of(p, k) & 13'hFFF) - real'(BASE);
      ratio = ql / (qs + ql);
      // which kind of pulse was this?
      ti = int'(t) + D;
      is_n = 1'b0;
      last_start = -100000;
      foreach (kind_at[i]) if (kind_at[i] <= ti) begin is_n = kind_n[i]; last_start = kind_at[i]; end
      // only triggers on the leading edge of a pulse are pulses; others are tails
      if (ti - last_start < 20) begin
        n_psd++;
        if (is_n) r_n_min = (ratio < r_n_min) ? ratio : r_n_min;
        else      r_g_max = (ratio > r_g_max) ? ratio : r_g_max;
      end
      p += len + 3;
    end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    adc_rst = 1'b0; rst = 1'b0;
    reg_wr(1, THR);
    reg_wr(2, PRE);
    reg_wr(3, 2500);                  // 20 us
    reg_wr(0, 32'h1);
    while (!bram_full[0]) @(posedge clk);
    read_bank(0);
    reg_wr(3, 1500);                  // 12 us
    while (!bram_full[1]) @(posedge clk);
    read_bank(1);
    while (!bram_full[0]) @(posedge clk);
    read_bank(0);
    parse();
    $display("pulses %0d; 20 us records %0d, 12 us records %0d, PSD ratio: neutron min %f, gamma max %f",
             n_psd, n_20, n_12, r_n_min, r_g_max);
    check(n_20 >= 3 && n_12 >= 3, "both record lengths recorded");
    check(n_psd >= 8, "pulses classified");
    check(r_n_min > r_g_max, "PSD ratio separates neutrons from gammas");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
