// tb_dvfs_ctrl -- checks the clock-enable ratio of each performance level
// (1/4, 1/2, 1), software level selection and the automatic level chosen
// from the pending-event load.
module tb_dvfs_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pl_we = 0, auto_mode, clk_en;
  logic [2:0] pl_wdata = 0;
  logic [3:0] load = 0;
  logic [1:0] pl;
  dvfs_ctrl dut (.*);

  task automatic check(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic measure(input int exp_en, input string s);
    int n = 0;
    repeat (64) begin @(posedge clk); #1 if (clk_en) n++; end
    check(n == exp_en, $sformatf("%s: %0d enables in 64 cycles, expected %0d", s, n, exp_en));
  endtask

  task automatic set(input logic [2:0] v);
    @(negedge clk); pl_we = 1; pl_wdata = v;
    @(negedge clk); pl_we = 0;
    @(negedge clk);
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
    @(negedge clk);
    check(pl == 2 && !auto_mode, "reset level PL2");
    measure(64, "PL2");
    set(3'd0); check(pl == 0, "PL0 selected"); measure(16, "PL0");
    set(3'd1); check(pl == 1, "PL1 selected"); measure(32, "PL1");
    set(3'd3); check(pl == 2, "pl=3 acts as PL2");
    set(3'b100); check(auto_mode && pl == 0, "auto, no load -> PL0");
    load = 1; @(negedge clk); @(negedge clk); check(pl == 1, "auto, load 1 -> PL1");
    load = 5; @(negedge clk); @(negedge clk); check(pl == 2, "auto, load 5 -> PL2");
    measure(64, "auto PL2");
    load = 0; @(negedge clk); @(negedge clk); check(pl == 0, "auto, load 0 -> PL0");
    measure(16, "auto PL0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
