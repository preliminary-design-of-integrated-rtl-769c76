// tb_adc_iddr: drives random bits on the 13 lanes, one value set up before each rising
// edge and another before the following falling edge, and checks that both come out
// together, rising-edge bits on q_rise and falling-edge bits on q_fall, exactly one
// clock after the rising edge that started the pair. Also checks the reset value.
module tb_adc_iddr;
  localparam int L = 13;
  logic adc_clk = 1'b0, adc_rst = 1'b1;
  logic [L-1:0] ddr_in = '0, q_rise, q_fall;
  int checks = 0, failures = 0;

  adc_iddr #(.LANES(L)) dut (.adc_clk, .adc_rst, .ddr_in, .q_rise, .q_fall);

  always #2 adc_clk = ~adc_clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [L-1:0] a, b, pa, pb;
    repeat (3) @(posedge adc_clk);
    #0.5;
    checks++;
    if (q_rise !== '0 || q_fall !== '0) failures++;
    adc_rst = 1'b0;
    for (int k = 0; k < 400; k++) begin
      a = L'($urandom); b = L'($urandom);
      @(negedge adc_clk); #1 ddr_in = a;     // 1 ns before the rising edge
      @(posedge adc_clk); #1;
      // this rising edge has just presented the previous pair
      if (k > 0) begin
        checks++;
        if (q_rise !== pa || q_fall !== pb) begin
          failures++;
          $display("mismatch: got %h/%h expected %h/%h", q_rise, q_fall, pa, pb);
        end
      end
      ddr_in = b;                            // 1 ns before the falling edge
      pa = a; pb = b;
    end
    @(posedge adc_clk); #1;
    checks++;
    if (q_rise !== pa || q_fall !== pb) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
