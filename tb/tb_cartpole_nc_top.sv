// tb_cartpole_nc_top: end-to-end run of the cartpole controller logic at its
// default (published) sizes: 12-bit ADC at ~350 kHz with a 64-sample median,
// quadrature encoder, 7-32-32-1 neural controller, 10 kHz PWM.
//
// A behavioural ADC converter supplies a pole-angle level with single-sample
// spikes; an encoder stimulus moves the cart forward, then back. Acting as the
// processor, the testbench loads random weights, then runs control periods:
// it reads the filtered angle and the cart count, builds the 7-element input
// (target equilibrium alternating between down and up), starts an inference
// and checks the command against an independent reference model, the
// 77-cycle latency, and the PWM duty and direction that follow. Control
// steps start every 25,000 cycles, the published 1 kHz rate.
// It counts how often each mechanism happened and fails if one never did.
module tb_cartpole_nc_top;
  import nc_pkg::*;

  logic clk = 1'b0;
  always #20 clk = ~clk;                 // 25 MHz
  logic rst_n = 1'b0;

  // converter model
  logic adc_convst, adc_eoc, adc_den, adc_drdy;
  logic [6:0] adc_daddr;
  logic [15:0] adc_do;
  logic [11:0] vin = 12'd0;
  xadc_model adc (.clk, .vin, .convst(adc_convst), .eoc(adc_eoc), .den(adc_den),
                  .daddr(adc_daddr), .drdy(adc_drdy), .do_o(adc_do));

  logic enc_a = 1'b0, enc_b = 1'b0;
  hbridge_t motor;
  logic adc_enable = 1'b0, angle_valid, enc_err;
  logic [11:0] angle_raw;
  logic [15:0] adc_missed;
  logic signed [15:0] cart_count;
  logic nc_wr_en = 1'b0;
  layer_sel_e nc_wr_layer = LAYER_H1;
  logic [4:0] nc_wr_row = '0;
  logic [5:0] nc_wr_col = '0;
  logic signed [CP_WT_W-1:0] nc_wr_data = '0;
  logic nc_in_valid = 1'b0, nc_in_ready, nc_out_valid;
  logic signed [CP_IN_W-1:0] nc_x [CP_N_IN];
  logic signed [CP_RES_W-1:0] nc_u;
  logic motor_enable = 1'b0, pwm_period_start;

  cartpole_nc_top dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_samples = 0, n_spikes = 0, n_enc_fwd = 0, n_enc_rev = 0;
  int n_inf_up = 0, n_inf_down = 0, n_pwm_fwd = 0, n_pwm_rev = 0, n_pwm_sat = 0;

  // ---------------------------------------------------------------- ADC stimulus
  int level = 1000;
  int conv_no = 0;
  always @(posedge clk) begin
    if (adc_convst) begin
      conv_no <= conv_no + 1;
      // every 16th conversion after this one sees a full-scale spike
      if ((conv_no + 1) % 16 == 5) begin vin <= 12'd4095; n_spikes <= n_spikes + 1; end
      else vin <= 12'(level);
    end
    if (angle_valid) n_samples <= n_samples + 1;
  end

  // ------------------------------------------------------------ encoder stimulus
  int enc_phase = 0;
  longint enc_pos = 0;
  task automatic enc_step(int dir);
    enc_phase = (enc_phase + dir) & 3;
    enc_pos += dir;
    enc_a = (enc_phase == 1 || enc_phase == 2);
    enc_b = (enc_phase == 2 || enc_phase == 3);
    if (dir > 0) n_enc_fwd++; else n_enc_rev++;
  endtask

  // ---------------------------------------------------------- reference model
  longint wt [3][32][33];
  int fan_in [3]  = '{CP_N_IN, CP_N_H1, CP_N_H2};
  int fan_out [3] = '{CP_N_H1, CP_N_H2, CP_N_OUT};

  function automatic longint sat(longint v, int bits);
    longint mx = (longint'(1) << (bits - 1)) - 1;
    longint mn = -(longint'(1) << (bits - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  function automatic longint ref_tanh(longint r);   // r: Q18.6
    longint idx = (r >>> 5) + 512;
    if (idx < 0) idx = 0;
    if (idx > 1023) idx = 1023;
    return sat(longint'($floor($tanh(-4.0 + real'(idx) / 128.0) * 2048.0 + 0.5)), 12);
  endfunction

  function automatic longint ref_nc(longint xin [7]);
    longint a [32], h [32], acc;
    int fin;
    for (int i = 0; i < 7; i++) a[i] = xin[i];
    fin = 10;                                       // Q12.2 input
    for (int l = 0; l < 3; l++) begin
      for (int j = 0; j < fan_out[l]; j++) begin
        acc = wt[l][j][fan_in[l]] <<< fin;
        for (int i = 0; i < fan_in[l]; i++) acc += a[i] * wt[l][j][i];
        acc = sat(acc >>> (fin + 10 - 12), 18);      // to Q18.6
        h[j] = (l < 2) ? ref_tanh(acc) : acc;
      end
      a = h;
      fin = 11;                                      // Q12.1 activations
    end
    return a[0];
  endfunction

  task automatic wr(int l, int r, int c, longint v);
    @(negedge clk);
    nc_wr_en = 1'b1; nc_wr_layer = layer_sel_e'(l); nc_wr_row = 5'(r); nc_wr_col = 6'(c);
    nc_wr_data = CP_WT_W'(v);
    @(negedge clk);
    nc_wr_en = 1'b0;
  endtask

  // ------------------------------------------------------------------ main
  longint cyc = 0, t0 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    foreach (nc_x[i]) nc_x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // weights: hidden +-1.0, output +-0.25 (Q14.4 has 10 fraction bits)
    for (int l = 0; l < 3; l++)
      for (int r = 0; r < fan_out[l]; r++)
        for (int c = 0; c <= fan_in[l]; c++) begin
          longint range;
          range = (l == 2) ? 256 : 1024;
          wt[l][r][c] = longint'($urandom_range(0, 2 * range)) - range;
          wr(l, r, c, wt[l][r][c]);
        end
    adc_enable = 1'b1;
    motor_enable = 1'b1;
    t0 = cyc;

    fork
      // encoder: 300 steps forward, then 120 back, one every 600 cycles
      begin
        for (int s = 0; s < 420; s++) begin
          enc_step(s < 300 ? 1 : -1);
          repeat (600) @(negedge clk);
        end
      end
      // processor control loop
      begin
        for (int k = 0; k < 16; k++) begin
          longint xv [7];
          longint uref, mag, exp_hi;
          int lat, hi, len;
          bit up;
          // control steps start every 25,000 cycles: 1 kHz at 25 MHz
          while (cyc < t0 + longint'(k) * 25000) @(negedge clk);
          checks++;
          if (cyc != t0 + longint'(k) * 25000) begin
            failures++; $display("FAIL: step %0d overran its 1 ms period", k - 1);
          end
          if (k == 8) level = 3000;                 // pole angle step
          // large output biases drive the command into saturation, both ways
          if (k == 12) begin wt[2][0][32] = 6000;  wr(2, 0, 32, 6000);  end
          if (k == 14) begin wt[2][0][32] = -6000; wr(2, 0, 32, -6000); end
          // let the median window refill with the (new) level
          if (k == 0 || k == 8) repeat (64 * 71 + 200) @(negedge clk);
          checks++;
          if (int'(angle_raw) != level) begin
            failures++; $display("FAIL: angle %0d expected %0d", angle_raw, level);
          end
          up = k[0];
          xv[0] = longint'(angle_raw) - 2048;            // stands for sin(theta)
          xv[1] = 2047 - longint'(angle_raw);            // stands for cos(theta)
          xv[2] = longint'($urandom_range(0, 1023)) - 512;
          xv[3] = sat(longint'(cart_count), 12);         // cart position
          xv[4] = longint'($urandom_range(0, 1023)) - 512;
          xv[5] = longint'($urandom_range(0, 2047)) - 1024;
          xv[6] = up ? 1024 : 0;                         // target equilibrium, 1.0 = up
          for (int i = 0; i < 7; i++) nc_x[i] = CP_IN_W'(xv[i]);
          uref = ref_nc(xv);
          checks++;
          if (!nc_in_ready) begin failures++; $display("FAIL: NC not ready"); end
          nc_in_valid = 1'b1;
          @(negedge clk);
          nc_in_valid = 1'b0;
          lat = 0;
          while (!nc_out_valid && lat < 500) begin @(negedge clk); lat++; end
          checks += 2;
          if (lat != 77) begin failures++; $display("FAIL: NC latency %0d", lat); end
          if (longint'(nc_u) != uref) begin
            failures++; $display("FAIL: period %0d u=%0d expected %0d", k, nc_u, uref);
          end
          if (up) n_inf_up++; else n_inf_down++;
          // the command reaches the pins from the next full PWM period
          while (!pwm_period_start) @(negedge clk);
          @(negedge clk);
          while (!pwm_period_start) @(negedge clk);
          hi = 0; len = 0;
          do begin
            if (motor.pwm) hi++;
            len++;
            @(negedge clk);
          end while (!pwm_period_start);
          mag = (uref < 0) ? -uref : uref;
          exp_hi = (mag >= 4096) ? 2500 : (mag * 2500) / 4096;
          checks += 3;
          if (len != 2500) begin failures++; $display("FAIL: PWM period %0d", len); end
          if (hi != exp_hi) begin failures++; $display("FAIL: PWM high %0d expected %0d", hi, exp_hi); end
          if (motor.in1 != (uref > 0) || motor.in2 != (uref < 0)) begin
            failures++; $display("FAIL: direction pins for u=%0d", uref);
          end
          if (uref > 0) n_pwm_fwd++;
          if (uref < 0) n_pwm_rev++;
          if (mag >= 4096) n_pwm_sat++;
        end
      end
    join
    repeat (5) @(negedge clk);
    checks += 3;
    if (longint'(cart_count) != enc_pos) begin failures++; $display("FAIL: cart count %0d expected %0d", cart_count, enc_pos); end
    if (enc_err) begin failures++; $display("FAIL: encoder error"); end
    if (adc_missed != 0) begin failures++; $display("FAIL: ADC missed %0d ticks", adc_missed); end

    $display("mechanisms: adc_samples=%0d spikes=%0d enc_fwd=%0d enc_rev=%0d inf_up=%0d inf_down=%0d pwm_fwd=%0d pwm_rev=%0d pwm_sat=%0d",
             n_samples, n_spikes, n_enc_fwd, n_enc_rev, n_inf_up, n_inf_down, n_pwm_fwd, n_pwm_rev, n_pwm_sat);
    checks += 9;
    if (n_samples == 0) failures++;
    if (n_spikes == 0) failures++;
    if (n_enc_fwd == 0) failures++;
    if (n_enc_rev == 0) failures++;
    if (n_inf_up == 0) failures++;
    if (n_inf_down == 0) failures++;
    if (n_pwm_fwd == 0) begin failures++; $display("FAIL: no forward drive"); end
    if (n_pwm_rev == 0) begin failures++; $display("FAIL: no reverse drive"); end
    if (n_pwm_sat == 0) begin failures++; $display("FAIL: no saturated command"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
