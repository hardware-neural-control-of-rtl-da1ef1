// tb_mlp_nc_f1tenth: the F1TENTH neural controller configuration
// (64-64-64-2, Q16.4 inputs/weights/activations, 16-bit results, 4 inputs
// per cycle). Random weights and inputs are checked bit for bit against the
// reference model; latency must be 54 cycles, within the published 93.
module tb_mlp_nc_f1tenth;
  import nc_pkg::*;
  logic clk = 1'b0;
  always #20 clk = ~clk;
  int checks, failures;
  logic finished;

  mlp_nc_check #(
    .N_IN(F1_N_IN), .N_H1(F1_N_H1), .N_H2(F1_N_H2), .N_OUT(F1_N_OUT), .PAR(F1_PAR),
    .IN_W(F1_IN_W), .IN_I(F1_IN_I), .WT_W(F1_WT_W), .WT_I(F1_WT_I),
    .ACT_W(F1_ACT_W), .ACT_I(F1_ACT_I), .RES_W(F1_RES_W), .RES_I(F1_RES_I),
    .N_INFER(20), .MAX_LAT(93), .EXP_LAT(54), .WT_RANGE_L2(10)
  ) chk (.clk, .checks, .failures, .finished);

  initial begin
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
