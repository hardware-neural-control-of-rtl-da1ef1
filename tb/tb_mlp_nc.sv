// tb_mlp_nc: cartpole neural controller (7-32-32-1, default parameters).
// Random weights and inputs; every output is compared bit for bit with an
// independent reference model, and each inference must take exactly 77
// cycles (at most the published 91).
module tb_mlp_nc;
  logic clk = 1'b0;
  always #20 clk = ~clk;   // 25 MHz
  int checks, failures;
  logic finished;

  mlp_nc_check #(.N_INFER(30), .MAX_LAT(91), .EXP_LAT(77)) chk (.clk, .checks, .failures, .finished);

  initial begin
    wait (finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
