// tb_adc_ctrl: adc_ctrl against the behavioural converter model. Checks that
// samples arrive every 71 cycles (about 350 kHz at 25 MHz), carry the applied
// 12-bit code, that nothing is sampled while disabled, and that a converter
// too slow for the rate makes the controller count missed ticks.
module tb_adc_ctrl;
  logic clk = 1'b0;
  always #20 clk = ~clk;
  logic rst_n = 1'b0, enable = 1'b0;
  logic [11:0] vin = '0;
  int checks = 0, failures = 0;

  // normal converter
  logic convst, eoc, den, drdy, sample_valid;
  logic [6:0] daddr;
  logic [15:0] do_w, missed;
  logic [11:0] sample;
  adc_ctrl dut (.clk, .rst_n, .enable, .convst, .eoc, .den, .daddr, .drdy, .do_i(do_w),
                .sample_valid, .sample, .missed);
  xadc_model adc (.clk, .vin, .convst, .eoc, .den, .daddr, .drdy, .do_o(do_w));

  // converter slower than the sample period
  logic convst2, eoc2, den2, drdy2, sv2;
  logic [6:0] daddr2;
  logic [15:0] do2, missed2;
  logic [11:0] sample2;
  adc_ctrl dut2 (.clk, .rst_n, .enable, .convst(convst2), .eoc(eoc2), .den(den2), .daddr(daddr2),
                 .drdy(drdy2), .do_i(do2), .sample_valid(sv2), .sample(sample2), .missed(missed2));
  xadc_model #(.CONV_CYC(100)) adc2 (.clk, .vin, .convst(convst2), .eoc(eoc2), .den(den2),
                                     .daddr(daddr2), .drdy(drdy2), .do_o(do2));

  initial begin
    longint last = -1, now;
    int nsamp = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (300) begin
      @(negedge clk);
      checks++;
      if (sample_valid || convst) begin failures++; $display("FAIL: activity while disabled"); end
    end
    enable = 1'b1;
    vin = 12'd1234;
    for (int cyc = 0; cyc < 71 * 40; cyc++) begin
      @(negedge clk);
      now = cyc;
      if (sample_valid) begin
        checks++;
        if (sample != vin) begin failures++; $display("FAIL: sample %0d expected %0d", sample, vin); end
        if (last >= 0) begin
          checks++;
          if (now - last != 71) begin failures++; $display("FAIL: sample spacing %0d", now - last); end
        end
        last = now;
        nsamp++;
        vin = 12'($urandom_range(0, 4095));   // new level takes effect at the next convst
      end
    end
    checks += 3;
    if (nsamp < 39) begin failures++; $display("FAIL: only %0d samples", nsamp); end
    if (missed != 0) begin failures++; $display("FAIL: missed %0d with a fast converter", missed); end
    if (missed2 == 0) begin failures++; $display("FAIL: slow converter did not register missed ticks"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
