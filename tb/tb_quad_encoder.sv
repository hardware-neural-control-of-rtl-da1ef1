// tb_quad_encoder: drives random walks of quadrature steps (both directions,
// random spacing) and compares the decoded count with the number of steps
// taken; checks the three-edge latency, wrap-around at 16 bits and that an
// illegal double transition pulses err without moving the count.
module tb_quad_encoder;
  logic clk = 1'b0;
  always #20 clk = ~clk;
  logic rst_n = 1'b0, a = 1'b0, b = 1'b0, err;
  logic signed [15:0] count;
  int checks = 0, failures = 0;
  int phase = 0;     // 0..3 along 00,10,11,01
  longint pos = 0;
  int nerr = 0;

  quad_encoder dut (.*);

  always @(posedge clk) if (rst_n && err) nerr++;

  task automatic put_phase();
    unique case (phase & 3)
      0: begin a = 0; b = 0; end
      1: begin a = 1; b = 0; end
      2: begin a = 1; b = 1; end
      3: begin a = 0; b = 1; end
    endcase
  endtask

  task automatic step(int dir);
    phase = (phase + dir) & 3;
    pos += dir;
    put_phase();
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // latency: first step, count must change on exactly the third edge
    @(negedge clk); step(+1);
    @(negedge clk); @(negedge clk);
    checks++;
    if (count != 0) begin failures++; $display("FAIL: count moved too early"); end
    @(negedge clk);
    checks++;
    if (count != 1) begin failures++; $display("FAIL: count %0d after 3 edges", count); end
    for (int n = 0; n < 4000; n++) begin
      int dir;
      dir = (n < 1500) ? 1 : (n < 2500) ? -1 : ($urandom_range(0, 1) ? 1 : -1);
      step(dir);
      repeat ($urandom_range(1, 4)) @(negedge clk);
      if (n % 50 == 0) begin
        repeat (3) @(negedge clk);
        checks++;
        if (longint'(count) != pos) begin failures++; $display("FAIL: count %0d expected %0d", count, pos); end
      end
    end
    // illegal jump: both channels toggle together
    repeat (3) @(negedge clk);
    phase = (phase + 2) & 3;
    put_phase();
    repeat (4) @(negedge clk);
    checks += 2;
    if (nerr != 1) begin failures++; $display("FAIL: err pulses %0d", nerr); end
    if (longint'(count) != pos) begin failures++; $display("FAIL: count moved on illegal step"); end
    // wrap-around: walk 40000 steps forward
    for (int n = 0; n < 40000; n++) begin step(+1); @(negedge clk); end
    repeat (3) @(negedge clk);
    checks++;
    if (count != 16'(pos)) begin failures++; $display("FAIL: wrap count %0d expected %0d", count, 16'(pos)); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
