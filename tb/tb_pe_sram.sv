// tb_pe_sram -- self-checking test of the PE SRAM and its port arbiter.
// A reference model (associative array of 128-bit words) tracks every write.
// Checks: wide and narrow reads return the modelled data exactly one cycle
// after the grant, byte enables and strobes touch only their bytes, and
// simultaneous requests are granted wide > data > instruction.
module tb_pe_sram;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_req = 0, w_we = 0, w_gnt, w_rvalid;
  logic [12:0] w_addr = 0;
  logic [127:0] w_wdata = 0, w_rdata;
  logic [15:0] w_strb = 0;
  logic d_req = 0, d_we = 0, d_gnt, d_rvalid;
  logic [16:0] d_addr = 0, i_addr = 0;
  logic [31:0] d_wdata = 0, d_rdata, i_rdata;
  logic [3:0] d_be = 0;
  logic i_req = 0, i_gnt, i_rvalid;

  pe_sram dut (.*);

  logic [127:0] model [int];

  function automatic logic [127:0] mget(int a);
    return model.exists(a) ? model[a] : 128'd0;
  endfunction

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic wide_write(input int a, input logic [127:0] d, input logic [15:0] s);
    logic [127:0] m;
    @(negedge clk);
    w_req = 1; w_we = 1; w_addr = 13'(a); w_wdata = d; w_strb = s;
    #1 check(w_gnt, "wide write granted");
    @(negedge clk);
    w_req = 0; w_we = 0;
    m = mget(a);
    for (int b = 0; b < 16; b++) if (s[b]) m[8*b +: 8] = d[8*b +: 8];
    model[a] = m;
  endtask

  task automatic wide_read(input int a);
    @(negedge clk);
    w_req = 1; w_we = 0; w_addr = 13'(a);
    @(negedge clk);
    w_req = 0;
    check(w_rvalid, "wide rvalid one cycle after grant");
    check(w_rdata == mget(a), $sformatf("wide read %0d got %h exp %h", a, w_rdata, mget(a)));
  endtask

  task automatic data_write(input int ba, input logic [31:0] d, input logic [3:0] be);
    logic [127:0] m;
    int a, l;
    a = ba / 16; l = (ba / 4) % 4;
    @(negedge clk);
    d_req = 1; d_we = 1; d_addr = 17'(ba); d_wdata = d; d_be = be;
    #1 check(d_gnt, "data write granted");
    @(negedge clk);
    d_req = 0; d_we = 0;
    m = mget(a);
    for (int b = 0; b < 4; b++) if (be[b]) m[32*l + 8*b +: 8] = d[8*b +: 8];
    model[a] = m;
  endtask

  task automatic narrow_read(input bit instr, input int ba);
    logic [31:0] e;
    e = mget(ba / 16)[32*((ba / 4) % 4) +: 32];
    @(negedge clk);
    if (instr) begin i_req = 1; i_addr = 17'(ba); end
    else begin d_req = 1; d_we = 0; d_addr = 17'(ba); end
    @(negedge clk);
    i_req = 0; d_req = 0;
    if (instr) begin
      check(i_rvalid && i_rdata == e, $sformatf("instr read %0h got %h exp %h", ba, i_rdata, e));
    end else begin
      check(d_rvalid && d_rdata == e, $sformatf("data read %0h got %h exp %h", ba, d_rdata, e));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the array has no reset: give the tested region a known content first
    for (int a = 0; a < 64; a++) wide_write(a, '0, 16'hFFFF);
    wide_write(8191, '0, 16'hFFFF);
    wide_write(5, 128'h0123456789abcdef_fedcba9876543210, 16'hFFFF);
    wide_read(5);
    wide_write(5, {16{8'hAA}}, 16'h00F0);
    wide_read(5);
    data_write(5 * 16 + 8, 32'hDEADBEEF, 4'b1010);
    wide_read(5);
    narrow_read(1, 5 * 16 + 8);
    narrow_read(0, 5 * 16 + 4);
    wide_write(8191, {4{32'h5A5AA5A5}}, 16'hFFFF);
    narrow_read(0, 8191 * 16 + 12);
    // arbitration: all three at once
    @(negedge clk);
    w_req = 1; w_we = 0; w_addr = 5; d_req = 1; d_we = 0; d_addr = 17'(8191 * 16); i_req = 1; i_addr = 17'(5 * 16);
    #1 check(w_gnt && !d_gnt && !i_gnt, "wide wins");
    @(negedge clk);
    w_req = 0;
    #1 check(d_gnt && !i_gnt, "data wins over instr");
    check(w_rvalid && w_rdata == mget(5), "wide data while data port waits");
    @(negedge clk);
    d_req = 0;
    #1 check(i_gnt, "instr granted last");
    check(d_rvalid && d_rdata == mget(8191)[31:0], "data port result");
    @(negedge clk);
    i_req = 0;
    check(i_rvalid && i_rdata == mget(5)[31:0], "instr port result");
    // random traffic against the model
    for (int n = 0; n < 300; n++) begin
      int a;
      a = $urandom_range(0, 63);
      case ($urandom_range(0, 3))
        0: wide_write(a, {$urandom, $urandom, $urandom, $urandom}, 16'($urandom));
        1: data_write(a * 16 + 4 * $urandom_range(0, 3), $urandom, 4'($urandom));
        2: wide_read(a);
        default: narrow_read(1'($urandom), a * 16 + 4 * $urandom_range(0, 3));
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
