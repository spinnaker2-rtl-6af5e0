// tb_prng -- compares the generator with an independent xorshift32 model,
// checks reseeding, the zero-seed guard and that `value` holds without next.
module tb_prng;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic seed_we = 0, next = 0;
  logic [31:0] seed = 0, value;
  prng dut (.*);

  logic [31:0] m;
  task automatic step_model();
    m ^= m << 13; m ^= m >> 17; m ^= m << 5;
  endtask
  task automatic check(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
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
    m = 32'h2545_F491;
    #1 check(value == m, "reset value");
    for (int n = 0; n < 200; n++) begin
      @(negedge clk); next = 1;
      @(negedge clk); next = 0; step_model();
      check(value == m, $sformatf("step %0d got %h exp %h", n, value, m));
    end
    @(negedge clk); seed_we = 1; seed = 32'd1;
    @(negedge clk); seed_we = 0; m = 1;
    check(value == 1, "seed 1");
    repeat (3) @(negedge clk);
    check(value == 1, "holds without next");
    @(negedge clk); next = 1;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk); step_model();
      check(value == m, "continuous stepping");
    end
    next = 0;
    @(negedge clk); seed_we = 1; seed = 0;
    @(negedge clk); seed_we = 0;
    check(value == 32'h2545_F491, "zero seed replaced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
