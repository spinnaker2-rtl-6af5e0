// tb_dma -- drives both DMA directions against a memory model and a NoC
// sink with random back-pressure.  Write-out: every packet must be a WRITE
// to rnode at raddr+16*i carrying local word i, irq only on the last.
// Fetch: READ_REQ packets with the right remote and return addresses, and
// `done` only after the last response.  Also a zero-length job.
module tb_dma;
  import s2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, dir = 0, irq_last = 0, busy, done;
  logic [16:0] local_addr = 0;
  node_t rnode = '0;
  logic [31:0] raddr = 0;
  logic [15:0] len = 0;
  logic m_req, m_gnt, m_rvalid = 0;
  logic [SRAM_AW-1:0] m_addr;
  logic [127:0] m_rdata = 0;
  logic tx_valid, tx_ready;
  noc_pkt_t tx_pkt;
  logic resp_done = 0;

  dma #(.NODE(9'o123)) dut (.*);

  assign m_gnt = m_req;
  function automatic logic [127:0] word(int a);
    return {32'(a) ^ 32'h1234_5678, 32'(a * 7), 32'(~a), 32'(a)};
  endfunction
  always @(posedge clk) begin
    m_rvalid <= m_gnt;
    m_rdata  <= word(int'(m_addr));
  end
  logic rdy;
  always_ff @(posedge clk) rdy <= 1'($urandom_range(0, 1));
  assign tx_ready = rdy;

  task automatic check(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  int got;
  task automatic write_out(input int la, input int n, input bit il);
    got = 0;
    @(negedge clk);
    start = 1; dir = 0; local_addr = 17'(la); rnode = '{x: 3'd2, y: 3'd5, sub: 3'd1}; raddr = 32'h8000_0040; len = 16'(n); irq_last = il;
    @(negedge clk);
    start = 0;
    while (!done) begin
      @(posedge clk);
      if (tx_valid && tx_ready) begin
        check(tx_pkt.ptype == PKT_WRITE && tx_pkt.dst == rnode && tx_pkt.src == node_t'(9'o123), "write header");
        check(tx_pkt.addr == raddr + 32'(16 * got), "write address");
        check(tx_pkt.payload == word(la / 16 + got), "write payload");
        check(tx_pkt.irq == (il && got == n - 1), "irq only on last");
        got++;
      end
      #1;
    end
    check(got == n, $sformatf("wrote %0d of %0d words", got, n));
  endtask

  task automatic fetch(input int la, input int n);
    int reqs = 0, resps = 0;
    @(negedge clk);
    start = 1; dir = 1; local_addr = 17'(la); rnode = '{x: 3'd0, y: 3'd1, sub: 3'd7}; raddr = 32'h0010_0000; len = 16'(n);
    @(negedge clk);
    start = 0;
    while (!done) begin
      @(posedge clk);
      if (tx_valid && tx_ready) begin
        check(tx_pkt.ptype == PKT_READ_REQ && tx_pkt.dst == rnode, "read request header");
        check(tx_pkt.addr == raddr + 32'(16 * reqs), "read request address");
        check(tx_pkt.payload[31:0] == 32'(la + 16 * reqs), "return address");
        reqs++;
      end
      #1;
      resp_done = (resps < reqs) && ($urandom_range(0, 1) == 1);
      if (resp_done) resps++;
      check(!(done && resps < n), "done before all responses");
    end
    resp_done = 0;
    check(reqs == n && resps == n, $sformatf("fetch %0d requests %0d responses of %0d", reqs, resps, n));
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
    write_out(32'h400, 1, 1);
    write_out(32'h1230, 20, 1);
    write_out(32'h1230, 5, 0);
    fetch(32'h800, 1);
    fetch(32'h900, 17);
    @(negedge clk);
    start = 1; dir = 0; len = 0;
    @(negedge clk);
    start = 0;
    check(done && !busy, "zero-length job ends at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
