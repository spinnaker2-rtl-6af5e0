// tb_exp_accel -- checks exp(x) of the accelerator against the simulator's
// real-valued $exp for edge values and random operands over the s16.15
// range.  Allowed error: 3e-4 relative plus 2 LSB.  Also checks the
// one-cycle latency and saturation.
module tb_exp_accel;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  logic [31:0] x = 0, y;
  exp_accel dut (.*);

  task automatic run(input logic signed [31:0] xv);
    real xr, er, yr, tol;
    @(negedge clk);
    x = xv; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("FAIL: no out_valid after 1 cycle"); end
    xr = real'(xv) / 32768.0;
    er = $exp(xr);
    yr = real'(y) / 32768.0;
    tol = er * 3.0e-4 + 2.0 / 32768.0;
    checks++;
    if (er >= 65535.9) begin
      if (y != 32'h7FFF_FFFF) begin failures++; $display("FAIL: no saturation x=%f y=%h", xr, y); end
    end else if ((yr - er > tol) || (er - yr > tol)) begin
      failures++;
      $display("FAIL: exp(%f) = %f, expected %f", xr, yr, er);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0);
    run(32'sd32768);          // 1.0
    run(-32'sd32768);         // -1.0
    run(32'sd32768 * 10);     // 10
    run(32'sd32768 * 11);     // 11 -> 59874
    run(32'sd32768 * 12);     // saturates
    run(-32'sd32768 * 12);
    run(32'sd16384);
    for (int n = 0; n < 500; n++)
      run(32'($signed($urandom_range(0, 2 * 32768 * 11)) - 32768 * 11));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
