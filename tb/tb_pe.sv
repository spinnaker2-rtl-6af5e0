// tb_pe -- drives one processing element through its core buses and its NoC
// ports, with the core replaced by bus tasks.  Checked: SRAM byte writes and
// reads on the data bus and fetches on the instruction bus; a NoC WRITE that
// lands in SRAM and is read back by the core, while the core is stalled by
// the 128-bit port; a WRITE with the irq flag raising the interrupt; a
// READ_REQ answered from SRAM; a core-composed packet on the NoC output; the
// exp and log accelerators against real-valued references; the PRNG against
// a model of xorshift32; the TRNG register; the DVFS register and the
// core clock-enable pattern of each performance level; and a MAC job started
// through the registers whose result is read back from SRAM.
module tb_pe;
  import s2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int stalls = 0;

  localparam logic [8:0] ME = 9'o121;
  logic i_req = 0, i_gnt, i_rvalid;
  logic [31:0] i_addr = 0, i_rdata;
  core_req_t d_req = '0;
  core_rsp_t d_rsp;
  logic irq, core_clk_en;
  logic [1:0] pl;
  logic trng_valid = 0;
  logic [31:0] trng_value = 0;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 1;
  noc_pkt_t rx_pkt = '0, tx_pkt;

  pe #(.NODE(ME)) dut (.*);

  task automatic check(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic dwrite(input logic [31:0] a, input logic [31:0] d, input logic [3:0] be = 4'hF);
    @(negedge clk);
    d_req = '{req: 1'b1, we: 1'b1, be: be, addr: a, wdata: d};
    @(posedge clk);
    while (!d_rsp.gnt) begin stalls++; @(posedge clk); end
    @(negedge clk);
    d_req = '0;
  endtask

  task automatic dread(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    d_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: '0};
    @(posedge clk);
    while (!d_rsp.gnt) begin stalls++; @(posedge clk); end
    @(negedge clk);
    d_req = '0;
    check(d_rsp.rvalid, "rvalid one cycle after gnt");
    d = d_rsp.rdata;
  endtask

  task automatic iread(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    i_req = 1; i_addr = a;
    @(posedge clk);
    while (!i_gnt) @(posedge clk);
    @(negedge clk);
    i_req = 0;
    check(i_rvalid, "instruction rvalid");
    d = i_rdata;
  endtask

  task automatic noc_in(input pkt_type_e t, input logic irqf, input logic [31:0] a, input logic [127:0] p);
    @(negedge clk);
    rx_valid = 1;
    rx_pkt = '{ptype: t, dst: ME, src: 9'o012, irq: irqf, addr: a, payload: p};
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    @(negedge clk);
    rx_valid = 0;
  endtask

  noc_pkt_t sent [$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) sent.push_back(tx_pkt);

  function automatic logic [31:0] xs(logic [31:0] s);
    s ^= s << 13; s ^= s >> 17; s ^= s << 5;
    return s;
  endfunction

  localparam logic [31:0] R = 32'hE000_0000;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v, w;
    logic [31:0] ref_mem [64];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // SRAM through the data bus, read through both buses
    for (int i = 0; i < 64; i++) begin
      ref_mem[i] = $urandom;
      dwrite(32'h1000 + 4 * i, ref_mem[i]);
    end
    dwrite(32'h1004, 32'hAA00_0000, 4'b1000);
    ref_mem[1][31:24] = 8'hAA;
    for (int i = 0; i < 64; i++) begin
      dread(32'h1000 + 4 * i, v);
      check(v == ref_mem[i], $sformatf("data read %0d", i));
      iread(32'h1000 + 4 * i, v);
      check(v == ref_mem[i], $sformatf("instr read %0d", i));
    end
    // NoC writes competing with core reads: the core is stalled
    fork
      begin
        // back-to-back packets, rx_valid held high
        @(negedge clk);
        for (int i = 0; i < 16; i++) begin
          rx_valid = 1;
          rx_pkt = '{ptype: PKT_WRITE, dst: ME, src: 9'o012, irq: 1'b0, addr: 32'h2000 + 16 * i,
                     payload: {4{32'(i) * 32'h0101_0101}}};
          @(posedge clk);
          while (!rx_ready) @(posedge clk);
          #1;
        end
        rx_valid = 0;
      end
      begin
        // core read request held high for 40 cycles
        @(negedge clk);
        d_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'h1000, wdata: '0};
        repeat (40) begin
          @(posedge clk);
          if (!d_rsp.gnt) stalls++;
        end
        @(negedge clk);
        d_req = '0;
      end
    join
    check(stalls > 0, "core stalled by the 128-bit port");
    for (int i = 0; i < 16; i++) begin
      dread(32'h2000 + 16 * i + 8, v);
      check(v == 32'(i) * 32'h0101_0101, "NoC write landed");
    end
    // WRITE with irq flag
    dwrite(R + 8'h04, 32'h2);
    check(!irq, "no irq yet");
    noc_in(PKT_WRITE, 1, 32'h3000, 128'h1);
    repeat (3) @(posedge clk);
    check(irq, "irq after flagged write");
    dread(R + 8'h08, v);
    check(v == 32'h3000, "irq address");
    dwrite(R + 8'h00, 32'h2);
    repeat (2) @(posedge clk);
    check(!irq, "irq cleared");
    // READ_REQ answered
    sent.delete();
    noc_in(PKT_READ_REQ, 0, 32'h1000, 128'h4440);
    repeat (20) @(posedge clk);
    check(sent.size() == 1 && sent[0].ptype == PKT_READ_RESP && sent[0].dst == 9'o012 &&
          sent[0].addr == 32'h4440 && sent[0].payload[63:32] == ref_mem[1], "read response");
    // core-composed packet
    sent.delete();
    dwrite(R + 8'h10, 32'(9'o444));
    dwrite(R + 8'h14, 32'h1234_5670);
    for (int i = 0; i < 4; i++) dwrite(R + 8'h18 + 4 * i, 32'hC0DE_0000 + i);
    dwrite(R + 8'h28, 32'h4 | 32'(PKT_WRITE));
    repeat (10) @(posedge clk);
    check(sent.size() == 1 && sent[0].dst == 9'o444 && sent[0].irq && sent[0].src == ME &&
          sent[0].addr == 32'h1234_5670 && sent[0].payload == {32'hC0DE_0003, 32'hC0DE_0002, 32'hC0DE_0001, 32'hC0DE_0000},
          "core-composed packet");
    // exp and log
    for (int i = 0; i < 50; i++) begin
      int xi;
      real ex, got;
      xi = int'($urandom_range(0, 8 * 32768)) - 4 * 32768;
      dwrite(R + 8'h90, 32'(xi));
      dread(R + 8'h90, v);
      ex = $exp(real'(xi) / 32768.0);
      got = real'(v) / 32768.0;
      check(got - ex < 0.001 * ex + 0.0002 && ex - got < 0.001 * ex + 0.0002, $sformatf("exp(%f)=%f got %f", real'(xi) / 32768.0, ex, got));
      xi = int'($urandom_range(1, 100 * 32768));
      dwrite(R + 8'h94, 32'(xi));
      dread(R + 8'h94, v);
      ex = $ln(real'(xi) / 32768.0);
      got = real'($signed(v)) / 32768.0;
      check(got - ex < 0.001 && ex - got < 0.001, $sformatf("ln(%f)=%f got %f", real'(xi) / 32768.0, ex, got));
    end
    // PRNG
    dwrite(R + 8'h98, 32'h1357_9BDF);
    dread(R + 8'h98, v);
    check(v == 32'h1357_9BDF, "seed read back");
    for (int i = 0; i < 20; i++) begin
      w = xs(v);
      dread(R + 8'h98, v);
      check(v == w, "xorshift sequence");
    end
    // TRNG
    @(negedge clk); trng_valid = 1; trng_value = 32'hFACE_B00C;
    @(negedge clk); trng_valid = 0;
    dread(R + 8'h9C, v);
    check(v == 32'hFACE_B00C, "trng word");
    // DVFS: clock enable pattern of each level
    for (int l = 0; l < 3; l++) begin
      int ones;
      dwrite(R + 8'hA0, 32'(l));
      dread(R + 8'hA0, v);
      check(v == 32'(l) && pl == 2'(l), "performance level");
      ones = 0;
      repeat (64) begin @(posedge clk); ones += int'(core_clk_en); end
      check(ones == (l == 0 ? 16 : l == 1 ? 32 : 64), $sformatf("clk_en rate level %0d: %0d", l, ones));
    end
    // MAC job: A 4x2 at 0x4000, B 2x16 at 0x5000, C at 0x6000, 8-bit
    begin
      byte a [4][2], b [2][16];
      for (int k = 0; k < 2; k++) begin
        for (int r = 0; r < 4; r++) a[r][k] = byte'($urandom);
        for (int c = 0; c < 16; c++) b[k][c] = byte'($urandom);
        dwrite(32'h4000 + 16 * k, {a[3][k], a[2][k], a[1][k], a[0][k]});
        for (int c = 0; c < 16; c += 4)
          dwrite(32'h5000 + 16 * k + c, {b[k][c + 3], b[k][c + 2], b[k][c + 1], b[k][c]});
      end
      dwrite(R + 8'h04, 32'h8);
      dwrite(R + 8'h70, 32'h4000);
      dwrite(R + 8'h74, 32'h5000);
      dwrite(R + 8'h78, 32'h6000);
      dwrite(R + 8'h7C, 32'd2);
      dwrite(R + 8'h80, 32'h1);
      repeat (200) begin @(posedge clk); if (irq) break; end
      check(irq, "MAC done irq");
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 16; c++) begin
          int e;
          e = int'(a[r][0]) * int'(b[0][c]) + int'(a[r][1]) * int'(b[1][c]);
          dread(32'h6000 + 64 * r + 4 * c, v);
          check(v == 32'(e), $sformatf("C[%0d][%0d]", r, c));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
