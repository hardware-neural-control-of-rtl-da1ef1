// pwm_gen: motor PWM for the cart's H-bridge (TB6612FNG style driver).
//
// The signed motor command cmd (CMD_W bits, CMD_F fractional bits, +-1.0 =
// full power) is held in a register written by cmd_valid. At the start of
// every PWM period (PERIOD = CLK_HZ / PWM_HZ cycles, 2500 cycles = 10 kHz at
// 25 MHz) the duty cycle is taken from it: duty = min(|cmd|, 1) * PERIOD,
// rounded down, and the direction from its sign. The pwm output is high for
// the first duty cycles of the period. Direction: cmd > 0 drives in1 high,
// cmd < 0 drives in2 high, cmd = 0 leaves both low (driver stop). Latching
// once per period keeps every pulse whole. With enable low the driver is put
// in standby (stby low) and all drive signals are low.
//
// The 10 kHz rate and the H-bridge are published; the command format (the
// cartpole controller's output format), saturation at +-1, sign-to-direction
// mapping and per-period latching are this design's choices.
module pwm_gen
  import nc_pkg::hbridge_t;
#(
  parameter int unsigned CLK_HZ = 25_000_000,
  parameter int unsigned PWM_HZ = 10_000,
  parameter int CMD_W = 18,
  parameter int CMD_F = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    enable,
  input  logic                    cmd_valid,
  input  logic signed [CMD_W-1:0] cmd,
  output hbridge_t                drv,
  output logic                    period_start
);

  localparam int unsigned PERIOD = CLK_HZ / PWM_HZ;
  localparam int PW = $clog2(PERIOD + 1);
  localparam int MW = CMD_W + PW + 1;

  logic signed [CMD_W-1:0] cmd_q;
  logic [PW-1:0]           cnt, duty;
  logic                    dir_pos, dir_neg;
  logic [CMD_W:0]          mag;
  logic [MW-1:0]           prod;
  logic [PW-1:0]           duty_nxt;

  always_comb begin
    mag  = cmd_q[CMD_W-1] ? (CMD_W+1)'(-cmd_q) : (CMD_W+1)'(cmd_q);
    prod = MW'(mag) * MW'(PERIOD);
    if (mag >= (CMD_W+1)'(1 << CMD_F))
      duty_nxt = PW'(PERIOD);
    else
      duty_nxt = PW'(prod >> CMD_F);
  end

  assign period_start = (cnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_q   <= '0;
      cnt     <= '0;
      duty    <= '0;
      dir_pos <= 1'b0;
      dir_neg <= 1'b0;
    end else begin
      if (cmd_valid) cmd_q <= cmd;
      cnt <= (cnt == PW'(PERIOD - 1)) ? '0 : cnt + 1'b1;
      if (cnt == PW'(PERIOD - 1)) begin
        duty    <= duty_nxt;
        dir_pos <= !cmd_q[CMD_W-1] && cmd_q != '0;
        dir_neg <= cmd_q[CMD_W-1];
      end
    end
  end

  always_comb begin
    drv.stby = enable;
    drv.pwm  = enable && (cnt < duty);
    drv.in1  = enable && dir_pos;
    drv.in2  = enable && dir_neg;
  end

endmodule
