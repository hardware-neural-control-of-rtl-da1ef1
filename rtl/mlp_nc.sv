// mlp_nc: the neural-controller (NC) accelerator, a multilayer perceptron
// N_IN - N_H1 - N_H2 - N_OUT with tanh hidden layers and a linear output.
//
// The NC maps the current state and the control goal straight to the control
// action. One inference: when in_valid and in_ready are both high the input
// vector is captured; the three dense layers then run one after another
// (layer k+1 starts on layer k's done) and out_valid pulses for one cycle with
// u holding the outputs, which stay valid until the next inference ends.
// in_ready is low while an inference runs.
//
// Latency, counted in clock edges from the edge that accepts the input to the
// edge that raises out_valid: sum over layers of (ceil(fan_in / PAR) + 2).
// That is 77 cycles (3.08 us at 25 MHz) for the default cartpole
// network 7-32-32-1, within the 91 cycles / <4 us published for it, and
// 54 cycles for the 64-64-64-2 F1TENTH network with PAR = 4 (published: 93).
//
// Weights are loaded through wr_* (wr_layer picks the layer, wr_row the
// neuron, wr_col the input; wr_col == fan_in writes the bias). Loading must
// not overlap an inference.
//
// Network shapes and number formats follow the published controllers; the
// default parameters are the cartpole controller. The layer-sequential
// schedule, the PAR parameter and the writable weights are this design's.
module mlp_nc
  import nc_pkg::layer_sel_e, nc_pkg::LAYER_H1, nc_pkg::LAYER_H2, nc_pkg::LAYER_OUT;
#(
  parameter int N_IN  = 7,
  parameter int N_H1  = 32,
  parameter int N_H2  = 32,
  parameter int N_OUT = 1,
  parameter int PAR   = 1,
  parameter int IN_W  = 12, parameter int IN_I  = 2,
  parameter int WT_W  = 14, parameter int WT_I  = 4,
  parameter int ACT_W = 12, parameter int ACT_I = 1,
  parameter int RES_W = 18, parameter int RES_I = 6,
  localparam int MAX_ROWS = (N_H1 > N_H2) ? ((N_H1 > N_OUT) ? N_H1 : N_OUT)
                                          : ((N_H2 > N_OUT) ? N_H2 : N_OUT),
  localparam int MAX_COLS = (N_IN > N_H1) ? ((N_IN > N_H2) ? N_IN : N_H2)
                                          : ((N_H1 > N_H2) ? N_H1 : N_H2),
  localparam int ROW_W = (MAX_ROWS > 1) ? $clog2(MAX_ROWS) : 1,
  localparam int COL_W = $clog2(MAX_COLS + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight / bias load
  input  logic                    wr_en,
  input  layer_sel_e              wr_layer,
  input  logic [ROW_W-1:0]        wr_row,
  input  logic [COL_W-1:0]        wr_col,
  input  logic signed [WT_W-1:0]  wr_data,
  // inference
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [IN_W-1:0]  x_in [N_IN],
  output logic                    out_valid,
  output logic signed [RES_W-1:0] u [N_OUT]
);

  localparam int R1 = (N_H1  > 1) ? $clog2(N_H1)  : 1;
  localparam int R2 = (N_H2  > 1) ? $clog2(N_H2)  : 1;
  localparam int R3 = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int C1 = $clog2(N_IN + 1);
  localparam int C2 = $clog2(N_H1 + 1);
  localparam int C3 = $clog2(N_H2 + 1);

  logic signed [IN_W-1:0]  x_reg [N_IN];
  logic signed [ACT_W-1:0] h1 [N_H1];
  logic signed [ACT_W-1:0] h2 [N_H2];
  logic start1, busy1, done1, busy2, done2, busy3, done3;
  logic running;

  // Input capture and sequencing.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      start1  <= 1'b0;
    end else begin
      start1 <= 1'b0;
      // Weights must not change while an inference is running.
      if (wr_en) assert (!(running || busy1 || busy2 || busy3))
        else $error("mlp_nc: weight write during inference");
      if (in_valid && in_ready) begin
        running <= 1'b1;
        start1  <= 1'b1;
      end else if (done3) begin
        running <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) x_reg <= x_in;
  end

  assign in_ready  = !running;
  assign out_valid = done3;

  dense_layer #(
    .N_IN(N_IN), .N_OUT(N_H1), .PAR(PAR),
    .IN_W(IN_W), .IN_I(IN_I), .WT_W(WT_W), .WT_I(WT_I),
    .RES_W(RES_W), .RES_I(RES_I), .OUT_W(ACT_W), .OUT_I(ACT_I), .TANH(1'b1)
  ) u_l1 (
    .clk, .rst_n,
    .wr_en(wr_en && wr_layer == LAYER_H1), .wr_row(R1'(wr_row)), .wr_col(C1'(wr_col)),
    .wr_data,
    .start(start1), .x(x_reg), .busy(busy1), .done(done1), .y(h1)
  );

  dense_layer #(
    .N_IN(N_H1), .N_OUT(N_H2), .PAR(PAR),
    .IN_W(ACT_W), .IN_I(ACT_I), .WT_W(WT_W), .WT_I(WT_I),
    .RES_W(RES_W), .RES_I(RES_I), .OUT_W(ACT_W), .OUT_I(ACT_I), .TANH(1'b1)
  ) u_l2 (
    .clk, .rst_n,
    .wr_en(wr_en && wr_layer == LAYER_H2), .wr_row(R2'(wr_row)), .wr_col(C2'(wr_col)),
    .wr_data,
    .start(done1), .x(h1), .busy(busy2), .done(done2), .y(h2)
  );

  dense_layer #(
    .N_IN(N_H2), .N_OUT(N_OUT), .PAR(PAR),
    .IN_W(ACT_W), .IN_I(ACT_I), .WT_W(WT_W), .WT_I(WT_I),
    .RES_W(RES_W), .RES_I(RES_I), .OUT_W(RES_W), .OUT_I(RES_I), .TANH(1'b0)
  ) u_l3 (
    .clk, .rst_n,
    .wr_en(wr_en && wr_layer == LAYER_OUT), .wr_row(R3'(wr_row)), .wr_col(C3'(wr_col)),
    .wr_data,
    .start(done2), .x(h2), .busy(busy3), .done(done3), .y(u)
  );

endmodule
