// mlp_nc_check: drives an mlp_nc instance with random weights and inputs and
// compares every output, bit for bit, with a reference model written here in
// plain integer/real arithmetic (floor to the result format, saturation,
// tanh looked up at the left edge of its 1/128-wide bin on [-4, 4), rounded
// and saturated to the activation format). It also checks the inference
// latency against the expected value and against a ceiling (the published
// cycle count). Used by the cartpole and F1TENTH testbenches.
module mlp_nc_check #(
  parameter int N_IN = 7, parameter int N_H1 = 32, parameter int N_H2 = 32,
  parameter int N_OUT = 1, parameter int PAR = 1,
  parameter int IN_W = 12, parameter int IN_I = 2,
  parameter int WT_W = 14, parameter int WT_I = 4,
  parameter int ACT_W = 12, parameter int ACT_I = 1,
  parameter int RES_W = 18, parameter int RES_I = 6,
  parameter int N_INFER = 20,
  parameter int MAX_LAT = 91,
  parameter int EXP_LAT = 77,
  parameter int WT_RANGE_L2 = 10    // weights drawn from +-2^WT_RANGE_L2 LSB
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);
  import nc_pkg::*;

  localparam int ROWS = (N_H1 > N_H2) ? ((N_H1 > N_OUT) ? N_H1 : N_OUT) : ((N_H2 > N_OUT) ? N_H2 : N_OUT);
  localparam int COLS = (N_IN > N_H1) ? ((N_IN > N_H2) ? N_IN : N_H2) : ((N_H1 > N_H2) ? N_H1 : N_H2);
  localparam int RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int CW = $clog2(COLS + 1);

  logic rst_n = 1'b0;
  logic wr_en = 1'b0;
  layer_sel_e wr_layer = LAYER_H1;
  logic [RW-1:0] wr_row = '0;
  logic [CW-1:0] wr_col = '0;
  logic signed [WT_W-1:0] wr_data = '0;
  logic in_valid = 1'b0, in_ready, out_valid;
  logic signed [IN_W-1:0] x_in [N_IN];
  logic signed [RES_W-1:0] u [N_OUT];

  mlp_nc #(.N_IN(N_IN), .N_H1(N_H1), .N_H2(N_H2), .N_OUT(N_OUT), .PAR(PAR),
           .IN_W(IN_W), .IN_I(IN_I), .WT_W(WT_W), .WT_I(WT_I),
           .ACT_W(ACT_W), .ACT_I(ACT_I), .RES_W(RES_W), .RES_I(RES_I)) dut (.*);

  // reference weights: [layer][row][col], col == fan-in is the bias
  longint wt [3][ROWS][COLS+1];

  function automatic longint sat(longint v, int bits);
    longint mx = (longint'(1) << (bits - 1)) - 1;
    longint mn = -(longint'(1) << (bits - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  function automatic longint floor_shift(longint v, int sh);
    return v >>> sh;   // arithmetic shift = floor division by 2^sh
  endfunction

  function automatic longint ref_tanh(longint r);
    int rf = RES_W - RES_I;
    int af = ACT_W - ACT_I;
    real xr, t;
    longint idx;
    xr  = real'(r) / real'(longint'(1) << rf);
    idx = longint'($floor(xr * 128.0)) + 512;
    if (idx < 0) idx = 0;
    if (idx > 1023) idx = 1023;
    t = $tanh(-4.0 + real'(idx) / 128.0);
    return sat(longint'($floor(t * real'(longint'(1) << af) + 0.5)), ACT_W);
  endfunction

  // One layer of the reference: inputs with frac fin -> outputs
  function automatic void ref_layer(int l, int nin, int nout, int fin, bit th,
                                    input longint xin [], output longint yout []);
    int wf = WT_W - WT_I, rf = RES_W - RES_I;
    yout = new[nout];
    for (int j = 0; j < nout; j++) begin
      longint acc = wt[l][j][nin] * (longint'(1) << fin);
      for (int i = 0; i < nin; i++) acc += xin[i] * wt[l][j][i];
      acc = sat(floor_shift(acc, fin + wf - rf), RES_W);
      yout[j] = th ? ref_tanh(acc) : acc;
    end
  endfunction

  task automatic write_w(int l, int r, int c, longint v);
    @(negedge clk);
    wr_en = 1'b1; wr_layer = layer_sel_e'(l); wr_row = RW'(r); wr_col = CW'(c);
    wr_data = WT_W'(v);
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  int fan_in [3] = '{N_IN, N_H1, N_H2};
  int fan_out[3] = '{N_H1, N_H2, N_OUT};

  initial begin : main
    longint xv [], h1 [], h2 [], yo [];
    int lat;
    checks = 0; failures = 0; finished = 1'b0;
    foreach (x_in[i]) x_in[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // random weights; biases a bit smaller
    for (int l = 0; l < 3; l++)
      for (int r = 0; r < fan_out[l]; r++)
        for (int c = 0; c <= fan_in[l]; c++) begin
          longint v;
          v = longint'($urandom_range(0, (1 << (WT_RANGE_L2 + 1)))) - (1 << WT_RANGE_L2);
          if (c == fan_in[l]) v = v / 4;
          wt[l][r][c] = v;
          write_w(l, r, c, v);
        end
    for (int n = 0; n < N_INFER; n++) begin
      xv = new[N_IN];
      for (int i = 0; i < N_IN; i++) begin
        xv[i] = longint'($urandom_range(0, (1 << IN_W) - 1)) - (1 << (IN_W - 1));
        if (n == 0) xv[i] = 0;                           // all-zero input: output = f(bias)
        if (n == 1) xv[i] = (i % 2) ? -(1 << (IN_W - 1)) : (1 << (IN_W - 1)) - 1;  // extremes
        x_in[i] = IN_W'(xv[i]);
      end
      ref_layer(0, N_IN, N_H1, IN_W - IN_I, 1'b1, xv, h1);
      ref_layer(1, N_H1, N_H2, ACT_W - ACT_I, 1'b1, h1, h2);
      ref_layer(2, N_H2, N_OUT, ACT_W - ACT_I, 1'b0, h2, yo);
      @(negedge clk);
      checks++;
      if (!in_ready) begin failures++; $display("FAIL: not ready before inference %0d", n); end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      for (int i = 0; i < N_IN; i++) x_in[i] = '1;       // inputs may change after capture
      lat = 1;
      while (!out_valid && lat < 1000) begin @(negedge clk); lat++; end
      lat = lat - 1;   // cycles from the accepting edge to the out_valid edge
      checks += 2;
      if (lat != EXP_LAT) begin failures++; $display("FAIL: latency %0d, expected %0d", lat, EXP_LAT); end
      if (lat > MAX_LAT)  begin failures++; $display("FAIL: latency %0d over %0d", lat, MAX_LAT); end
      for (int j = 0; j < N_OUT; j++) begin
        checks++;
        if (longint'(u[j]) != yo[j]) begin
          failures++;
          $display("FAIL: inference %0d output %0d = %0d, expected %0d", n, j, u[j], yo[j]);
        end
      end
    end
    finished = 1'b1;
  end
endmodule
