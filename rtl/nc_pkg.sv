// nc_pkg: constants shared by the neural-controller (NC) datapath and the
// cartpole peripherals.
//
// Fixed-point formats follow the QM.N convention: M total bits, N integer bits
// including the sign bit, so M-N fractional bits. The network shapes and the
// input/weight/activation formats are those of the two published controllers
// (cartpole 7-32-32-1 and F1TENTH 64-64-64-2). The integer width of the
// intermediate result (pre-activation) format, the bias format and the tanh
// table size are this design's own choices. The whole programmable logic
// runs on one 25 MHz clock, the NC clock the published design reports.
package nc_pkg;

  // Programmable-logic clock.
  localparam int unsigned PL_CLK_HZ = 25_000_000;

  // ---------------- cartpole neural controller: MLP 7-32-32-1 -------------
  localparam int CP_N_IN  = 7;   // sin, cos, dtheta, x, dx, x_target, theta_target
  localparam int CP_N_H1  = 32;
  localparam int CP_N_H2  = 32;
  localparam int CP_N_OUT = 1;   // normalized motor command
  localparam int CP_IN_W  = 12, CP_IN_I  = 2;   // input   Q12.2
  localparam int CP_WT_W  = 14, CP_WT_I  = 4;   // weight  Q14.4
  localparam int CP_ACT_W = 12, CP_ACT_I = 1;   // activation Q12.1
  localparam int CP_RES_W = 18, CP_RES_I = 6;   // intermediate result, 18 bits
  localparam int CP_PAR   = 1;                  // inputs consumed per cycle

  // ---------------- F1TENTH neural controller: MLP 64-64-64-2 -------------
  localparam int F1_N_IN  = 64;  // 20 waypoints x 3 values + vx, wz, steer, slip
  localparam int F1_N_H1  = 64;
  localparam int F1_N_H2  = 64;
  localparam int F1_N_OUT = 2;   // desired velocity, desired steering angle
  localparam int F1_IN_W  = 16, F1_IN_I  = 4;   // input   Q16.4
  localparam int F1_WT_W  = 16, F1_WT_I  = 4;   // weight  Q16.4
  localparam int F1_ACT_W = 16, F1_ACT_I = 4;   // activation Q16.4
  localparam int F1_RES_W = 16, F1_RES_I = 6;   // intermediate result, 16 bits
  localparam int F1_PAR   = 4;

  // tanh look-up table: TANH_ENTRIES points spanning [-TANH_RANGE, TANH_RANGE).
  localparam int TANH_ENTRIES_LOG2 = 10;
  localparam int TANH_RANGE_LOG2   = 2;   // range +-4

  // Layer select on the weight-load port.
  typedef enum logic [1:0] {
    LAYER_H1  = 2'd0,
    LAYER_H2  = 2'd1,
    LAYER_OUT = 2'd2
  } layer_sel_e;

  // H-bridge drive (TB6612FNG style: IN1/IN2 pick the direction, PWM the duty).
  typedef struct packed {
    logic pwm;
    logic in1;
    logic in2;
    logic stby;     // high = driver active, low = standby
  } hbridge_t;

endpackage
