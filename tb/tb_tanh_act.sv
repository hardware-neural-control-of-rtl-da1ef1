// tb_tanh_act: sweeps the pre-activation input of the cartpole-format tanh
// (Q18.6 in, Q12.1 out) across and beyond [-4, 4) and checks each output
// against (a) the expected table value, tanh at the bin's left edge rounded to
// 11 fraction bits, and (b) the true tanh of the input within 0.01.
module tb_tanh_act;
  localparam int IN_W = 18, IN_F = 12, OUT_W = 12, OUT_F = 11;
  logic signed [IN_W-1:0]  x;
  logic signed [OUT_W-1:0] y;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #20 clk = ~clk;

  tanh_act dut (.x, .y);

  initial begin
    for (int v = -(1 << 15); v < (1 << 15); v += 37) begin
      real xr, t, yr;
      longint idx, e;
      x  = IN_W'(v);
      #1;
      xr  = real'(v) / real'(1 << IN_F);
      idx = longint'($floor(xr * 128.0)) + 512;
      if (idx < 0) idx = 0;
      if (idx > 1023) idx = 1023;
      t = $tanh(-4.0 + real'(idx) / 128.0);
      e = longint'($floor(t * 2048.0 + 0.5));
      if (e > 2047) e = 2047;
      yr = real'(y) / 2048.0;
      checks += 2;
      if (longint'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL: x=%f y=%0d expected %0d", xr, y, e);
      end
      if (yr - $tanh(xr) > 0.01 || $tanh(xr) - yr > 0.01) begin
        failures++;
        if (failures < 10) $display("FAIL: x=%f y=%f tanh=%f", xr, yr, $tanh(xr));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
