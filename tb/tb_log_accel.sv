// tb_log_accel -- checks ln(x) of the accelerator against $ln for powers of
// two, values near 1 and random operands over the u16.15 range.  Allowed
// error: 8 LSB (2.4e-4).  Also checks latency and the x = 0 result.
module tb_log_accel;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  logic [31:0] x = 0, y;
  log_accel dut (.*);

  task automatic run(input logic [31:0] xv);
    real xr, er, yr;
    @(negedge clk);
    x = xv; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("FAIL: no out_valid"); end
    checks++;
    if (xv == 0) begin
      if (y != 32'h8000_0000) begin failures++; $display("FAIL: ln(0) = %h", y); end
    end else begin
      xr = real'(xv) / 32768.0;
      er = $ln(xr);
      yr = real'($signed(y)) / 32768.0;
      if ((yr - er > 8.0 / 32768.0) || (er - yr > 8.0 / 32768.0)) begin
        failures++;
        $display("FAIL: ln(%f) = %f, expected %f", xr, yr, er);
      end
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
    run(32'd32768);      // ln 1 = 0
    run(32'd65536);      // ln 2
    run(32'd1);          // smallest
    run(32'hFFFF_FFFF);  // largest
    run(32'd89073);      // ~e
    run(32'd0);
    for (int n = 0; n < 500; n++) run($urandom_range(1, 32'h7FFF_FFFF) >> $urandom_range(0, 30));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
