// tb_median_filter: feeds 64-sample windows of random data, with bursts of
// large outliers, ramps and runs of equal values (ties), at random gaps, and
// compares every output with the median computed by sorting a copy of the
// last 64 inputs (upper middle element). Also checks the one-cycle latency
// and that a single spike never reaches the output once the window is full.
module tb_median_filter;
  localparam int W = 12, N = 64;
  logic clk = 1'b0;
  always #20 clk = ~clk;
  logic rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [W-1:0] in_data = '0, median;
  int checks = 0, failures = 0;
  int hist [$];

  median_filter dut (.*);

  function automatic int ref_median();
    int s [$];
    s = hist;
    s.sort();
    return s[N/2];
  endfunction

  initial begin
    for (int i = 0; i < N; i++) hist.push_back(0);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      int v;
      if (n < 500)       v = 2000 + $urandom_range(0, 100);        // noisy level
      else if (n < 1000) v = (n % 2) ? 100 : 3000;                 // heavy ties
      else if (n < 1500) v = n * 3 % 4096;                         // ramp
      else               v = $urandom_range(0, 4095);
      if (n >= 64 && n < 500 && n % 37 == 0) v = 4095;             // single spikes
      in_data  = W'(v);
      in_valid = 1'b1;
      hist.push_back(v);
      void'(hist.pop_front());
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || int'(median) != ref_median()) begin
        failures++;
        if (failures < 10) $display("FAIL: n=%0d median=%0d expected %0d valid=%0b", n, median, ref_median(), out_valid);
      end
      if (n >= 64 && n < 500) begin
        checks++;
        if (median > 2100) begin failures++; $display("FAIL: spike passed at n=%0d", n); end
      end
      repeat ($urandom_range(0, 2)) begin
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("FAIL: out_valid without input"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
