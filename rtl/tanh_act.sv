// tanh_act: hyperbolic-tangent activation of one neuron.
//
// The pre-activation value x (signed, IN_W bits, IN_F fractional bits) is
// clamped to [-4, 4) and mapped onto a 1024-entry table with a step of 1/128;
// the table holds tanh at the left edge of each bin, rounded to the output
// format (OUT_W bits, OUT_F fractional bits) and saturated to it. The table
// is computed at elaboration time from the tanh formula, so no data file is
// needed. Purely combinational: y follows x in the same cycle.
//
// The published controllers use tanh activations quantized to the activation
// format; the table-based evaluation, its range and size are this design's
// choice (the usual way fixed-point MLP generators evaluate tanh).
module tanh_act
  import nc_pkg::TANH_ENTRIES_LOG2, nc_pkg::TANH_RANGE_LOG2;
#(
  parameter int IN_W  = 18,
  parameter int IN_F  = 12,
  parameter int OUT_W = 12,
  parameter int OUT_F = 11
) (
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] y
);

  localparam int N       = 1 << TANH_ENTRIES_LOG2;
  localparam int STEP_L2 = TANH_ENTRIES_LOG2 - TANH_RANGE_LOG2 - 1;  // bins per unit, log2
  localparam int SH      = IN_F - STEP_L2;
  localparam longint YMAX = (longint'(1) << (OUT_W - 1)) - 1;
  localparam longint YMIN = -(longint'(1) << (OUT_W - 1));

  typedef logic signed [OUT_W-1:0] lut_t [N];

  function automatic lut_t gen_lut();
    lut_t l;
    for (int i = 0; i < N; i++) begin
      real xv, e, th;
      longint q;
      xv = -real'(1 << TANH_RANGE_LOG2) + real'(i) / real'(1 << STEP_L2);
      e  = $exp(-2.0 * xv);
      th = (1.0 - e) / (1.0 + e);
      q  = longint'($floor(th * real'(longint'(1) << OUT_F) + 0.5));
      if (q > YMAX) q = YMAX;
      if (q < YMIN) q = YMIN;
      l[i] = OUT_W'(q);
    end
    return l;
  endfunction

  localparam lut_t LUT = gen_lut();

  initial begin
    assert (SH >= 0) else $error("tanh_act: IN_F must be at least %0d", STEP_L2);
  end

  // Bin index: floor(x * 2^STEP_L2) + N/2, clamped to the table.
  logic signed [IN_W-1:0] xs;
  logic signed [IN_W:0]   idx;
  logic [TANH_ENTRIES_LOG2-1:0] idx_c;

  always_comb begin
    xs  = x >>> SH;
    idx = (IN_W+1)'(xs) + (IN_W+1)'(N / 2);
    if (idx < 0)
      idx_c = '0;
    else if (idx > (IN_W+1)'(N - 1))
      idx_c = '1;
    else
      idx_c = idx[TANH_ENTRIES_LOG2-1:0];
    y = LUT[idx_c];
  end

endmodule
