// tb_comms -- exercises the PE communication controller through its NoC
// ports and registers, with a memory model on the SRAM port: remote write,
// remote write with interrupt (status, address, clear), remote read and its
// response, multicast events through the queue including a full queue that
// stalls the NoC, a core-composed packet, a DMA write-out and fetch driven
// through the registers, and a small MAC array job.
module tb_comms;
  import s2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam logic [8:0] ME = 9'o345;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready;
  noc_pkt_t rx_pkt = '0, tx_pkt;
  logic s_req, s_we, s_gnt, s_rvalid = 0;
  logic [SRAM_AW-1:0] s_addr;
  logic [127:0] s_wdata, s_rdata = 0;
  logic [15:0] s_strb;
  logic reg_we = 0;
  logic [7:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic irq;
  logic [3:0] ev_level;

  comms #(.NODE(ME)) dut (.*);

  logic [127:0] mem [int];
  assign s_gnt = s_req;
  always @(posedge clk) begin
    s_rvalid <= s_gnt && !s_we;
    if (s_gnt && s_we) mem[int'(s_addr)] = s_wdata;
    if (s_gnt && !s_we) s_rdata <= mem.exists(int'(s_addr)) ? mem[int'(s_addr)] : 128'd0;
  end

  // NoC sink with random back-pressure, captured packets in a queue
  noc_pkt_t txq [$];
  logic rdy;
  always_ff @(posedge clk) rdy <= 1'($urandom_range(0, 3) != 0);
  assign tx_ready = rdy;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) txq.push_back(tx_pkt);

  task automatic check(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rdv(input logic [7:0] a, output logic [31:0] v);
    reg_addr = a; #1 v = reg_rdata;
  endtask

  int stall_cycles;
  task automatic send(input pkt_type_e t, input logic [31:0] a, input logic [127:0] p, input bit irqf, input node_t src);
    @(negedge clk);
    rx_valid = 1;
    rx_pkt = '{ptype: t, dst: node_t'(ME), src: src, irq: irqf, addr: a, payload: p};
    @(posedge clk);
    while (!rx_ready) begin stall_cycles++; @(posedge clk); end
    @(negedge clk);
    rx_valid = 0;
  endtask

  task automatic wait_tx(input int n);
    int t = 0;
    while (txq.size() < n && t < 2000) begin @(posedge clk); t++; end
    check(txq.size() >= n, "expected packet sent");
  endtask

  logic [31:0] v;
  noc_pkt_t p;
  node_t other = '{x: 3'd1, y: 3'd2, sub: 3'd3};

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // remote write
    send(PKT_WRITE, 32'h1230, 128'h11112222_33334444_55556666_77778888, 0, other);
    repeat (3) @(negedge clk);
    check(mem[32'h123] == 128'h11112222_33334444_55556666_77778888, "remote write stored");
    check(!irq, "no irq without flag");
    // remote write with interrupt
    wr(8'h04, 32'hF);
    send(PKT_WRITE, 32'h0040, 128'h5, 1, other);
    repeat (3) @(negedge clk);
    rdv(8'h00, v); check(v[1], "remote irq status");
    check(irq, "irq line raised");
    rdv(8'h08, v); check(v == 32'h40, "irq address recorded");
    wr(8'h00, 32'h2);
    #1 check(!irq, "irq cleared by write-1");
    // remote read
    send(PKT_READ_REQ, 32'h1230, 128'h0000_0777, 0, other);
    wait_tx(1);
    p = txq.pop_front();
    check(p.ptype == PKT_READ_RESP && p.dst == other && p.src == node_t'(ME) && p.addr == 32'h777
          && p.payload == 128'h11112222_33334444_55556666_77778888, "read response");
    // multicast events
    for (int i = 0; i < 3; i++) send(PKT_MC, 32'hABC0 + i, 128'(i * 3), 0, other);
    repeat (3) @(negedge clk);
    rdv(8'h30, v); check(v == 3, "three events queued");
    check(irq, "event irq");
    for (int i = 0; i < 3; i++) begin
      rdv(8'h34, v); check(v == 32'hABC0 + i, "event key order");
      rdv(8'h38, v); check(v == i * 3, "event payload");
      rdv(8'h48, v); check(v == 32'(other), "event source");
      wr(8'h4C, 1);
    end
    #1 check(!irq, "queue drained");
    // full queue stalls the NoC input
    fork
      begin
        stall_cycles = 0;
        for (int i = 0; i < 10; i++) send(PKT_MC, 32'(i), '0, 0, other);
      end
      begin
        repeat (60) @(negedge clk);
        rdv(8'h30, v); check(v == 8, "queue full at 8");
        repeat (2) wr(8'h4C, 1);
      end
    join
    check(stall_cycles > 10, $sformatf("input stalled while queue full (%0d)", stall_cycles));
    repeat (8) wr(8'h4C, 1);
    // core composed packet
    wr(8'h10, 32'(other)); wr(8'h14, 32'hCAFE); wr(8'h18, 32'h1); wr(8'h1C, 32'h2); wr(8'h20, 32'h3); wr(8'h24, 32'h4);
    wr(8'h28, 32'h4 | 32'(PKT_WRITE));
    wait_tx(1);
    p = txq.pop_front();
    check(p.ptype == PKT_WRITE && p.irq && p.dst == other && p.addr == 32'hCAFE && p.payload == {32'h4, 32'h3, 32'h2, 32'h1}, "core packet");
    // DMA write-out of two words
    mem[32'h200] = 128'hA; mem[32'h201] = 128'hB;
    wr(8'h50, 32'h2000); wr(8'h54, 32'(other)); wr(8'h58, 32'h100); wr(8'h5C, 2); wr(8'h60, 32'b101);
    wait_tx(2);
    p = txq.pop_front(); check(p.ptype == PKT_WRITE && p.addr == 32'h100 && p.payload == 128'hA && !p.irq, "dma word 0");
    p = txq.pop_front(); check(p.ptype == PKT_WRITE && p.addr == 32'h110 && p.payload == 128'hB && p.irq, "dma word 1");
    repeat (3) @(negedge clk);
    rdv(8'h00, v); check(v[2], "dma done status");
    wr(8'h00, 32'h4);
    // DMA fetch of two words, answered here
    wr(8'h50, 32'h3000); wr(8'h58, 32'h500); wr(8'h5C, 2); wr(8'h60, 32'b011);
    wait_tx(2);
    for (int i = 0; i < 2; i++) begin
      p = txq.pop_front();
      check(p.ptype == PKT_READ_REQ && p.addr == 32'h500 + 16 * i && p.payload[31:0] == 32'h3000 + 16 * i, "fetch request");
      send(PKT_READ_RESP, p.payload[31:0], 128'hF0 + i, 0, other);
    end
    repeat (4) @(negedge clk);
    check(mem[32'h300] == 128'hF0 && mem[32'h301] == 128'hF1, "fetched words stored");
    rdv(8'h00, v); check(v[2], "fetch done status");
    rdv(8'h60, v); check(v == 0, "dma idle");
    // MAC: K = 1, A column (1,2,3,4), B row 0..15 -> C[r][c] = (r+1)*c
    mem[32'h400] = {96'd0, 8'd4, 8'd3, 8'd2, 8'd1};
    begin
      logic [127:0] b;
      for (int c = 0; c < 16; c++) b[8*c +: 8] = 8'(c);
      mem[32'h410] = b;
    end
    wr(8'h70, 32'h4000); wr(8'h74, 32'h4100); wr(8'h78, 32'h5000); wr(8'h7C, 1); wr(8'h80, 1);
    repeat (40) @(negedge clk);
    rdv(8'h00, v); check(v[3], "mac done status");
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 16; c++)
        check(mem[32'h500 + r * 4 + c / 4][32 * (c % 4) +: 32] == 32'((r + 1) * c), $sformatf("mac C[%0d][%0d]", r, c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
