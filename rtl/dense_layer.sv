// dense_layer: one fully connected layer of the neural-controller MLP.
//
// All N_OUT neurons work in parallel. After a one-cycle start pulse each
// neuron's accumulator is loaded with its bias, then for ceil(N_IN/PAR)
// cycles it adds PAR products x[i]*w[j][i] per cycle (a column of PAR inputs
// is broadcast to every neuron). The full-precision sum is then cut to the
// intermediate result format (RES_W bits, RES_F fractional bits; truncation
// of the dropped fraction, saturation on overflow) and, for hidden layers
// (TANH=1), passed through tanh into the activation format; for the output
// layer (TANH=0) the result format is the output. y is registered and valid
// from the cycle done is high until the next start.
//
// Timing: if the edge at cycle t samples start, the edge at t + ceil(N_IN/PAR) + 1
// raises done (one bias-load edge, ceil(N_IN/PAR) MAC edges, one output edge).
//
// Weights and biases live in a register file written through a simple port
// (wr_en, wr_row = neuron, wr_col = input index, wr_col == N_IN selects the
// bias). Biases use the weight format. The published controllers compile
// trained weights into the logic; a writable register file (loaded by the
// processor before operation) is this design's choice so that the same
// hardware can take any trained network. The parallel-neuron,
// PAR-inputs-per-cycle schedule is also this design's; the formats follow
// the published quantization.
module dense_layer #(
  parameter int N_IN  = 7,
  parameter int N_OUT = 32,
  parameter int PAR   = 1,    // inputs consumed per cycle
  parameter int IN_W  = 12, parameter int IN_I  = 2,
  parameter int WT_W  = 14, parameter int WT_I  = 4,
  parameter int RES_W = 18, parameter int RES_I = 6,
  parameter int OUT_W = 12, parameter int OUT_I = 1,
  parameter bit TANH  = 1'b1,
  localparam int ROW_W = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int COL_W = $clog2(N_IN + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight / bias load
  input  logic                    wr_en,
  input  logic [ROW_W-1:0]        wr_row,
  input  logic [COL_W-1:0]        wr_col,
  input  logic signed [WT_W-1:0]  wr_data,
  // compute
  input  logic                    start,
  input  logic signed [IN_W-1:0]  x [N_IN],
  output logic                    busy,
  output logic                    done,
  output logic signed [OUT_W-1:0] y [N_OUT]
);

  localparam int IN_F  = IN_W - IN_I;
  localparam int WT_F  = WT_W - WT_I;
  localparam int RES_F = RES_W - RES_I;
  localparam int OUT_F = OUT_W - OUT_I;
  localparam int CYC   = (N_IN + PAR - 1) / PAR;
  localparam int CNT_W = (CYC > 1) ? $clog2(CYC) : 1;
  localparam int ACC_W = IN_W + WT_W + $clog2(N_IN + 1) + 1;
  localparam int SH    = IN_F + WT_F - RES_F;     // product -> result alignment
  localparam longint RMAX = (longint'(1) << (RES_W - 1)) - 1;
  localparam longint RMIN = -(longint'(1) << (RES_W - 1));

  // ---------------------------------------------------------------- storage
  logic signed [WT_W-1:0] w [N_OUT][N_IN];
  logic signed [WT_W-1:0] b [N_OUT];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_row) < N_OUT) begin
      if (int'(wr_col) == N_IN)
        b[int'(wr_row)] <= wr_data;
      else if (int'(wr_col) < N_IN)
        w[int'(wr_row)][int'(wr_col)] <= wr_data;
    end
  end

  // --------------------------------------------------------------- control
  typedef enum logic [1:0] {S_IDLE, S_MAC, S_ACT} state_e;
  state_e             state;
  logic [CNT_W-1:0]   cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      // A new start while busy would corrupt the running accumulation.
      if (start) assert (state == S_IDLE) else $error("dense_layer: start while busy");
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAC;
          cnt   <= '0;
        end
        S_MAC: begin
          if (int'(cnt) == CYC - 1) state <= S_ACT;
          cnt <= cnt + 1'b1;
        end
        S_ACT: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // --------------------------------------------------------------- datapath
  logic signed [ACC_W-1:0] acc     [N_OUT];
  logic signed [ACC_W-1:0] acc_nxt [N_OUT];
  logic signed [RES_W-1:0] res     [N_OUT];
  logic signed [OUT_W-1:0] act     [N_OUT];

  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      acc_nxt[j] = acc[j];
      for (int p = 0; p < PAR; p++) begin
        int idx;
        idx = int'(cnt) * PAR + p;
        if (idx < N_IN)
          acc_nxt[j] = acc_nxt[j] + ACC_W'(x[idx] * w[j][idx]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) begin
      for (int j = 0; j < N_OUT; j++)
        acc[j] <= ACC_W'(b[j]) <<< IN_F;       // bias aligned to the product scale
    end else if (state == S_MAC) begin
      acc <= acc_nxt;
    end
  end

  // Result format: drop SH fraction bits (floor), saturate to RES_W.
  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      logic signed [ACC_W-1:0] sh;
      sh = acc[j] >>> SH;
      if (sh > ACC_W'(RMAX))      res[j] = RES_W'(RMAX);
      else if (sh < ACC_W'(RMIN)) res[j] = RES_W'(RMIN);
      else                        res[j] = RES_W'(sh);
    end
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_act
    if (TANH) begin : g_tanh
      tanh_act #(.IN_W(RES_W), .IN_F(RES_F), .OUT_W(OUT_W), .OUT_F(OUT_F)) u_tanh (
        .x(res[j]), .y(act[j])
      );
    end else begin : g_lin
      // Linear output layer: output format equals the result format.
      assign act[j] = OUT_W'(res[j]) <<< (OUT_F - RES_F);
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_ACT) y <= act;
  end

  initial begin
    assert (SH >= 0) else $error("dense_layer: result has more fraction bits than the product");
    assert (TANH || (OUT_F >= RES_F && OUT_W - OUT_F >= RES_W - RES_F))
      else $error("dense_layer: linear output format narrower than the result format");
  end


endmodule
