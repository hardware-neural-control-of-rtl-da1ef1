// tb_dense_layer: two small layers, both with a fan-in (5) that PAR (2) does
// not divide: a tanh layer (Q12.2 in, Q14.4 weights, Q18.6 result, Q12.1 out)
// and a linear layer (result format out). Random weights and inputs are
// compared with an integer reference; done must come ceil(5/2)+1 = 4 edges
// after the edge that samples start; a weight rewrite must take effect.
module tb_dense_layer;
  localparam int NI = 5, NO = 3, PAR = 2;
  logic clk = 1'b0;
  always #20 clk = ~clk;
  logic rst_n = 1'b0;
  logic wr_en = 1'b0;
  logic [1:0] wr_row = '0;
  logic [2:0] wr_col = '0;
  logic signed [13:0] wr_data = '0;
  logic start = 1'b0;
  logic signed [11:0] x [NI];
  logic busy_t, done_t, busy_l, done_l;
  logic signed [11:0] y_t [NO];
  logic signed [17:0] y_l [NO];
  int checks = 0, failures = 0;
  longint w [NO][NI+1];

  dense_layer #(.N_IN(NI), .N_OUT(NO), .PAR(PAR), .IN_W(12), .IN_I(2), .WT_W(14), .WT_I(4),
                .RES_W(18), .RES_I(6), .OUT_W(12), .OUT_I(1), .TANH(1'b1)) dut_t (
    .clk, .rst_n, .wr_en, .wr_row, .wr_col, .wr_data, .start, .x, .busy(busy_t), .done(done_t), .y(y_t));
  dense_layer #(.N_IN(NI), .N_OUT(NO), .PAR(PAR), .IN_W(12), .IN_I(2), .WT_W(14), .WT_I(4),
                .RES_W(18), .RES_I(6), .OUT_W(18), .OUT_I(6), .TANH(1'b0)) dut_l (
    .clk, .rst_n, .wr_en, .wr_row, .wr_col, .wr_data, .start, .x, .busy(busy_l), .done(done_l), .y(y_l));

  function automatic longint ref_res(int j);
    longint acc = w[j][NI] <<< 10;
    for (int i = 0; i < NI; i++) acc += longint'(x[i]) * w[j][i];
    acc = acc >>> 8;                       // 20 -> 12 fraction bits
    if (acc > 131071) acc = 131071;
    if (acc < -131072) acc = -131072;
    return acc;
  endfunction

  function automatic longint ref_tanh(longint r);
    longint idx = (r >>> 5) + 512;          // bins of 1/128 on [-4, 4)
    longint q;
    if (idx < 0) idx = 0;
    if (idx > 1023) idx = 1023;
    q = longint'($floor($tanh(-4.0 + real'(idx) / 128.0) * 2048.0 + 0.5));
    return (q > 2047) ? 2047 : q;
  endfunction

  task automatic wr(int r, int c, longint v);
    @(negedge clk); wr_en = 1; wr_row = 2'(r); wr_col = 3'(c); wr_data = 14'(v);
    @(negedge clk); wr_en = 0;
  endtask

  task automatic run_and_check(int n);
    int lat = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done_t && lat < 100) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 4 || !done_l) begin failures++; $display("FAIL: run %0d done after %0d", n, lat); end
    for (int j = 0; j < NO; j++) begin
      longint r = ref_res(j);
      checks += 2;
      if (longint'(y_l[j]) != r) begin failures++; $display("FAIL: lin %0d/%0d %0d vs %0d", n, j, y_l[j], r); end
      if (longint'(y_t[j]) != ref_tanh(r)) begin failures++; $display("FAIL: tanh %0d/%0d %0d vs %0d", n, j, y_t[j], ref_tanh(r)); end
    end
  endtask

  initial begin
    foreach (x[i]) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < NO; j++)
      for (int i = 0; i <= NI; i++) begin
        w[j][i] = longint'($urandom_range(0, 16383)) - 8192;
        wr(j, i, w[j][i]);
      end
    for (int n = 0; n < 40; n++) begin
      for (int i = 0; i < NI; i++) x[i] = 12'($urandom_range(0, 4095));
      if (n < 20) begin                       // small inputs keep tanh off its rails
        for (int i = 0; i < NI; i++) x[i] = 12'(longint'($urandom_range(0, 255)) - 128);
      end
      if (n == 10) begin                      // rewrite a weight and a bias
        w[1][2] = 4095; wr(1, 2, 4095);
        w[2][NI] = -5000; wr(2, NI, -5000);
      end
      run_and_check(n);
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
