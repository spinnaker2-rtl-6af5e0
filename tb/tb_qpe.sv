// tb_qpe -- one quad processing element with its router.  The four cores
// are replaced by bus tasks.  Checked: a core-composed WRITE from PE0 that
// lands in the SRAM of PE2; a DMA write-out from PE1 to PE3 whose last packet
// interrupts PE3; a DMA fetch by PE3 from the SRAM of PE0; a packet for
// another tile leaving through the east mesh port with X-first routing; a
// packet entering from the west mesh port and landing in PE1.
module tb_qpe;
  import s2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int QX = 1, QY = 1;
  logic        i_req [4], i_gnt [4], i_rvalid [4];
  logic [31:0] i_addr [4], i_rdata [4];
  core_req_t   d_req [4];
  core_rsp_t   d_rsp [4];
  logic        irq [4], core_clk_en [4];
  logic [1:0]  pl [4];
  logic        trng_valid [4];
  logic [31:0] trng_value [4];
  logic        m_in_valid [4], m_in_ready [4], m_out_valid [4], m_out_ready [4];
  noc_pkt_t    m_in_pkt [4], m_out_pkt [4];

  qpe #(.QX(QX), .QY(QY)) dut (.*);

  function automatic node_t nd(int x, int y, int s);
    return '{x: 3'(x), y: 3'(y), sub: 3'(s)};
  endfunction

  task automatic check(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic dwrite(input int p, input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    d_req[p] = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: a, wdata: d};
    @(posedge clk);
    while (!d_rsp[p].gnt) @(posedge clk);
    @(negedge clk);
    d_req[p] = '0;
  endtask

  task automatic dread(input int p, input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    d_req[p] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: '0};
    @(posedge clk);
    while (!d_rsp[p].gnt) @(posedge clk);
    @(negedge clk);
    d_req[p] = '0;
    d = d_rsp[p].rdata;
  endtask

  localparam logic [31:0] R = 32'hE000_0000;
  noc_pkt_t east [$];
  always @(posedge clk) if (rst_n && m_out_valid[1] && m_out_ready[1]) east.push_back(m_out_pkt[1]);

  initial begin
    for (int k = 0; k < 4; k++) begin
      i_req[k] = 0; i_addr[k] = 0; d_req[k] = '0; trng_valid[k] = 0; trng_value[k] = 0;
      m_in_valid[k] = 0; m_in_pkt[k] = '0; m_out_ready[k] = 1;
    end
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    logic [31:0] src [32];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // PE0 -> PE2 core packet
    dwrite(0, R + 8'h10, 32'(nd(QX, QY, 2)));
    dwrite(0, R + 8'h14, 32'h0000_0100);
    for (int i = 0; i < 4; i++) dwrite(0, R + 8'h18 + 4 * i, 32'hA0 + i);
    dwrite(0, R + 8'h28, 32'(PKT_WRITE));
    repeat (20) @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      dread(2, 32'h100 + 4 * i, v);
      check(v == 32'hA0 + i, "PE0 -> PE2 write");
    end
    // PE1 DMA write-out of 8 words to PE3, irq on the last
    for (int i = 0; i < 32; i++) begin
      src[i] = $urandom;
      dwrite(1, 32'h800 + 4 * i, src[i]);
    end
    dwrite(3, R + 8'h04, 32'h2);
    dwrite(1, R + 8'h50, 32'h800);
    dwrite(1, R + 8'h54, 32'(nd(QX, QY, 3)));
    dwrite(1, R + 8'h58, 32'h4000);
    dwrite(1, R + 8'h5C, 32'd8);
    check(!irq[3], "no irq before the transfer");
    dwrite(1, R + 8'h60, 32'h5);
    repeat (200) begin @(posedge clk); if (irq[3]) break; end
    check(irq[3], "irq of the last DMA packet");
    dread(3, R + 8'h08, v);
    check(v == 32'h4070, "irq address is the last word");
    for (int i = 0; i < 32; i++) begin
      dread(3, 32'h4000 + 4 * i, v);
      check(v == src[i], $sformatf("DMA write-out word %0d", i));
    end
    // PE3 fetches the same block back from PE1 into 0x6000 (8 words)
    dwrite(3, R + 8'h04, 32'h4);
    dwrite(3, R + 8'h50, 32'h6000);
    dwrite(3, R + 8'h54, 32'(nd(QX, QY, 1)));
    dwrite(3, R + 8'h58, 32'h800);
    dwrite(3, R + 8'h5C, 32'd8);
    dwrite(3, R + 8'h60, 32'h3);
    repeat (300) begin @(posedge clk); if (irq[3]) begin dread(3, R, v); if (v[2]) break; end end
    dread(3, R, v);
    check(v[2], "DMA fetch done");
    for (int i = 0; i < 32; i++) begin
      dread(3, 32'h6000 + 4 * i, v);
      check(v == src[i], $sformatf("DMA fetch word %0d", i));
    end
    // PE0 -> another tile, east port
    dwrite(0, R + 8'h10, 32'(nd(4, 0, 1)));
    dwrite(0, R + 8'h14, 32'h0000_0200);
    dwrite(0, R + 8'h28, 32'(PKT_WRITE));
    repeat (20) @(posedge clk);
    check(east.size() == 1 && east[0].dst == nd(4, 0, 1) && east[0].src == nd(QX, QY, 0),
          "X-first: leaves through the east port");
    // packet from the west port for PE1
    @(negedge clk);
    m_in_valid[3] = 1;
    m_in_pkt[3] = '{ptype: PKT_WRITE, dst: nd(QX, QY, 1), src: nd(0, 1, 0), irq: 1'b0,
                    addr: 32'h300, payload: 128'h5555_6666_7777_8888};
    @(posedge clk); while (!m_in_ready[3]) @(posedge clk);
    @(negedge clk); m_in_valid[3] = 0;
    repeat (20) @(posedge clk);
    dread(1, 32'h300, v);
    check(v == 32'h7777_8888, "west-port packet landed in PE1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
