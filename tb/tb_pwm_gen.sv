// tb_pwm_gen: applies motor commands (positive, negative, zero, beyond +-1)
// and measures each PWM period: it must be 2500 cycles (10 kHz at 25 MHz),
// the high time must equal floor(min(|cmd|,1) * 2500) and the direction pins
// must follow the sign. Also checks standby when disabled.
module tb_pwm_gen;
  import nc_pkg::hbridge_t;
  logic clk = 1'b0;
  always #20 clk = ~clk;
  logic rst_n = 1'b0, enable = 1'b0, cmd_valid = 1'b0, period_start;
  logic signed [17:0] cmd = '0;
  hbridge_t drv;
  int checks = 0, failures = 0;

  pwm_gen dut (.*);

  task automatic measure(longint c);
    longint mag, exp_hi;
    int hi = 0, len = 0;
    @(negedge clk);
    cmd = 18'(c); cmd_valid = 1'b1;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!period_start) @(negedge clk);   // the period in progress keeps its old duty
    @(negedge clk);
    while (!period_start) @(negedge clk);
    do begin
      if (drv.pwm) hi++;
      len++;
      checks++;
      if (drv.in1 != (c > 0) || drv.in2 != (c < 0) || !drv.stby) begin
        failures++; $display("FAIL: direction pins for cmd %0d", c);
      end
      @(negedge clk);
    end while (!period_start);
    mag = (c < 0) ? -c : c;
    exp_hi = (mag >= 4096) ? 2500 : (mag * 2500) / 4096;
    checks += 2;
    if (len != 2500) begin failures++; $display("FAIL: period %0d", len); end
    if (hi != exp_hi) begin failures++; $display("FAIL: cmd %0d high %0d expected %0d", c, hi, exp_hi); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (3000) begin
      @(negedge clk);
      checks++;
      if (drv.pwm || drv.in1 || drv.in2 || drv.stby) begin failures++; $display("FAIL: driving while disabled"); end
    end
    enable = 1'b1;
    measure(2048);      // 0.5
    measure(-1024);     // -0.25
    measure(0);
    measure(4096);      // 1.0
    measure(-20000);    // beyond -1: saturates
    measure(1);
    for (int i = 0; i < 6; i++) measure(longint'($urandom_range(0, 8191)) - 4096);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
