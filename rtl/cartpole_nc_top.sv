// cartpole_nc_top: programmable-logic part of the hardware neural controller
// for the physical cartpole.
//
// Sensor path: adc_ctrl samples the pole-angle potentiometer through the
// SoC's 12-bit ADC at about 350 kHz; median_filter takes a rolling median over
// the last 64 samples (angle_raw, updated with every sample). quad_encoder
// turns the motor encoder into the cart position count (cart_count).
//
// Control path: the processor reads angle_raw and cart_count, forms the
// 7-element input vector (sin and cos of the pole angle, angular velocity,
// cart position, cart velocity, target position, target equilibrium up/down)
// and presents it on nc_x with nc_in_valid. mlp_nc (MLP 7-32-32-1) answers
// 77 cycles later (3.08 us at 25 MHz) with the normalized motor command nc_u
// and a one-cycle nc_out_valid; the same pulse loads the command into pwm_gen,
// which applies it from the next 10 kHz PWM period on the H-bridge pins
// (motor). Control is triggered by the processor, at 1 kHz in the published
// experiments; the hardware puts no limit on the rate beyond the 77-cycle
// inference.
//
// Processor-side signals (weight loading, NC inputs/outputs, sensor readouts,
// enables) are plain ports here; the processor, its bus and its software, the
// converter macro and the H-bridge lie outside this module.
//
// Following the published design: the block set (PWM, ADC, encoder, median
// filter, NC), the 12-bit ADC at ~350 kHz, the 64-sample median, the 10 kHz
// PWM, the 7-32-32-1 network with its number formats and the 25 MHz clock.
// This design's choices: wiring the NC output straight to the PWM, the port
// list, and the choices listed in each block.
module cartpole_nc_top
  import nc_pkg::*;
#(
  parameter int unsigned CLK_HZ    = nc_pkg::PL_CLK_HZ,
  parameter int unsigned SAMPLE_HZ = 350_000,
  parameter int unsigned PWM_HZ    = 10_000,
  parameter int          MEDIAN_WINDOW = 64,
  parameter int          ENC_W     = 16,
  parameter logic [6:0]  ADC_CHANNEL = 7'h1E
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // ADC macro (dynamic reconfiguration port and conversion handshake)
  output logic                       adc_convst,
  input  logic                       adc_eoc,
  output logic                       adc_den,
  output logic [6:0]                 adc_daddr,
  input  logic                       adc_drdy,
  input  logic [15:0]                adc_do,
  // motor encoder
  input  logic                       enc_a,
  input  logic                       enc_b,
  // H-bridge
  output hbridge_t                   motor,
  // processor side: sensors
  input  logic                       adc_enable,
  output logic                       angle_valid,
  output logic [11:0]                angle_raw,
  output logic [15:0]                adc_missed,
  output logic signed [ENC_W-1:0]    cart_count,
  output logic                       enc_err,
  // processor side: neural controller
  input  logic                       nc_wr_en,
  input  layer_sel_e                 nc_wr_layer,
  input  logic [$clog2(CP_N_H1)-1:0]   nc_wr_row,
  input  logic [$clog2(CP_N_H1+1)-1:0] nc_wr_col,
  input  logic signed [CP_WT_W-1:0]  nc_wr_data,
  input  logic                       nc_in_valid,
  output logic                       nc_in_ready,
  input  logic signed [CP_IN_W-1:0]  nc_x [CP_N_IN],
  output logic                       nc_out_valid,
  output logic signed [CP_RES_W-1:0] nc_u,
  // processor side: motor
  input  logic                       motor_enable,
  output logic                       pwm_period_start
);

  logic        smp_valid;
  logic [11:0] smp;
  logic signed [CP_RES_W-1:0] u_vec [CP_N_OUT];

  adc_ctrl #(.CLK_HZ(CLK_HZ), .SAMPLE_HZ(SAMPLE_HZ), .CHANNEL(ADC_CHANNEL)) u_adc (
    .clk, .rst_n, .enable(adc_enable),
    .convst(adc_convst), .eoc(adc_eoc), .den(adc_den), .daddr(adc_daddr),
    .drdy(adc_drdy), .do_i(adc_do),
    .sample_valid(smp_valid), .sample(smp), .missed(adc_missed)
  );

  median_filter #(.W(12), .WINDOW(MEDIAN_WINDOW)) u_median (
    .clk, .rst_n, .in_valid(smp_valid), .in_data(smp),
    .out_valid(angle_valid), .median(angle_raw)
  );

  quad_encoder #(.CNT_W(ENC_W)) u_enc (
    .clk, .rst_n, .a(enc_a), .b(enc_b), .count(cart_count), .err(enc_err)
  );

  mlp_nc #(
    .N_IN(CP_N_IN), .N_H1(CP_N_H1), .N_H2(CP_N_H2), .N_OUT(CP_N_OUT), .PAR(CP_PAR),
    .IN_W(CP_IN_W), .IN_I(CP_IN_I), .WT_W(CP_WT_W), .WT_I(CP_WT_I),
    .ACT_W(CP_ACT_W), .ACT_I(CP_ACT_I), .RES_W(CP_RES_W), .RES_I(CP_RES_I)
  ) u_nc (
    .clk, .rst_n,
    .wr_en(nc_wr_en), .wr_layer(nc_wr_layer), .wr_row(nc_wr_row), .wr_col(nc_wr_col),
    .wr_data(nc_wr_data),
    .in_valid(nc_in_valid), .in_ready(nc_in_ready), .x_in(nc_x),
    .out_valid(nc_out_valid), .u(u_vec)
  );

  assign nc_u = u_vec[0];

  pwm_gen #(.CLK_HZ(CLK_HZ), .PWM_HZ(PWM_HZ), .CMD_W(CP_RES_W), .CMD_F(CP_RES_W - CP_RES_I)) u_pwm (
    .clk, .rst_n, .enable(motor_enable),
    .cmd_valid(nc_out_valid), .cmd(nc_u),
    .drv(motor), .period_start(pwm_period_start)
  );

endmodule
