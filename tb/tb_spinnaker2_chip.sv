// tb_spinnaker2_chip -- end-to-end test of the whole chip at its full size
// (152 PEs, 1024-entry multicast table), with the processor cores replaced
// by bus-level tasks, and with behavioural models of the host, the six chip
// links and the two DRAM channels.
//
// Main operation: a distributed matrix product C(4x16) = A(4x16) * B(16x16)
// run with the scheduling scheme of a scheduler PE and worker PEs:
//   1. the host loads the multicast routing table and writes one K-slice of
//      A and B into the SRAM of each of four workers spread over the mesh;
//   2. the host starts the scheduler with an interrupt-carrying write;
//   3. the scheduler sends an interrupt-carrying flag write to every worker;
//   4. each worker runs its slice on its MAC array and reports with an
//      interrupt-carrying flag write into the scheduler's SRAM;
//   5. once every flag is set, the scheduler interrupts the first worker,
//      which fetches the other partial products by DMA, adds them, writes
//      C to DRAM by DMA and notifies the host;
//   6. the host reads C back from DRAM and from the worker with READ_REQs
//      and compares it with a product computed here.
// Around it: multicast events from a core and from a chip link routed to
// PEs and links, a key with no route dropped, a PE in automatic DVFS mode
// that changes level with its event load, a DMA fetch from the second DRAM
// channel, the exp, log, PRNG and TRNG registers, and random back-pressure
// on the host port, the links and the DRAM ports.  Every mechanism is
// counted and a mechanism that never happened counts as a failure.
module tb_spinnaker2_chip;
  import s2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cnt [string];

  logic        core_i_req    [NUM_PE];
  logic [31:0] core_i_addr   [NUM_PE];
  logic        core_i_gnt    [NUM_PE];
  logic        core_i_rvalid [NUM_PE];
  logic [31:0] core_i_rdata  [NUM_PE];
  core_req_t   core_d_req    [NUM_PE];
  core_rsp_t   core_d_rsp    [NUM_PE];
  logic        core_irq      [NUM_PE];
  logic        core_clk_en   [NUM_PE];
  logic [1:0]  core_pl       [NUM_PE];
  logic        trng_valid    [NUM_PE];
  logic [31:0] trng_value    [NUM_PE];
  logic        host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  noc_pkt_t    host_in_pkt, host_out_pkt;
  logic        link_in_valid [NUM_LINKS], link_in_ready [NUM_LINKS];
  mc_pkt_t     link_in_pkt [NUM_LINKS];
  logic        link_out_valid [NUM_LINKS], link_out_ready [NUM_LINKS];
  mc_pkt_t     link_out_pkt [NUM_LINKS];
  logic        dram_req [2], dram_we [2], dram_gnt [2], dram_rvalid [2];
  logic [31:0] dram_addr [2];
  logic [DATA_W-1:0] dram_wdata [2], dram_rdata [2];
  logic [15:0] mc_drop_count, mc_route_count;

  spinnaker2_chip dut (.*);

  localparam logic [31:0] R = 32'hE000_0000;
  localparam int SCHED = 0;
  localparam int WORKER [4] = '{21, 62, 103, 150};
  localparam int MC_PE_A = 33, MC_PE_B = 100, MC_SRC = 5, LINK_PE = 140, DRAM_PE = 77, ACC_PE = 151;

  // ---------------- PE -> node map, recomputed from the floor plan ----------------
  node_t nodes [NUM_PE];
  initial begin
    int n = 0;
    for (int y = 0; y < 6; y++)
      for (int x = 0; x < 7; x++)
        if (!((x == 3 || x == 6) && (y == 2 || y == 3))) begin
          for (int k = 0; k < 4; k++) nodes[4 * n + k] = '{x: 3'(x), y: 3'(y), sub: 3'(k)};
          n++;
        end
  end
  localparam node_t RTR  = '{x: 3'd3, y: 3'd2, sub: 3'd0};
  localparam node_t HOST = '{x: 3'd5, y: 3'd0, sub: 3'd4};
  localparam node_t DR0  = '{x: 3'd0, y: 3'd1, sub: 3'd7};
  localparam node_t DR1  = '{x: 3'd0, y: 3'd4, sub: 3'd7};

  task automatic check(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  // ---------------- random back-pressure ----------------
  logic bp_host, bp_link [NUM_LINKS];
  always_ff @(posedge clk) begin
    bp_host <= ($urandom_range(0, 3) == 0);
    for (int l = 0; l < NUM_LINKS; l++) bp_link[l] <= ($urandom_range(0, 3) == 0);
  end
  assign host_out_ready = !bp_host;
  for (genvar l = 0; l < NUM_LINKS; l++) begin : g_lr
    assign link_out_ready[l] = !bp_link[l];
  end

  // ---------------- DRAM models: random grant, random read latency ----------------
  logic [127:0] dram [2][int];
  logic dg [2];
  always_ff @(posedge clk) for (int d = 0; d < 2; d++) dg[d] <= ($urandom_range(0, 2) != 0);
  for (genvar d = 0; d < 2; d++) begin : g_dram
    assign dram_gnt[d] = dram_req[d] && dg[d];
    int lat;
    logic [31:0] ra;
    initial begin dram_rvalid[d] = 0; dram_rdata[d] = '0; lat = 0; ra = 0; end
    always @(posedge clk) begin
      dram_rvalid[d] <= 1'b0;
      if (rst_n && dram_req[d] && !dram_gnt[d]) cnt["dram_stall"]++;
      if (dram_gnt[d] && dram_we[d]) begin
        dram[d][int'(dram_addr[d] >> 4)] = dram_wdata[d];
        cnt["dram_write"]++;
      end
      if (dram_gnt[d] && !dram_we[d]) begin
        lat = $urandom_range(2, 8);
        ra = dram_addr[d];
        cnt["dram_read"]++;
      end else if (lat > 0) begin
        lat--;
        if (lat == 0) begin
          dram_rvalid[d] <= 1'b1;
          dram_rdata[d]  <= dram[d].exists(int'(ra >> 4)) ? dram[d][int'(ra >> 4)] : '0;
        end
      end
    end
  end

  // ---------------- host port ----------------
  noc_pkt_t host_rx [$];
  always @(posedge clk) begin
    if (rst_n && host_out_valid && host_out_ready) host_rx.push_back(host_out_pkt);
    if (rst_n && host_out_valid && !host_out_ready) cnt["host_backpressure"]++;
  end
  task automatic host_send(input pkt_type_e t, input node_t dst, input logic irqf,
                           input logic [31:0] a, input logic [127:0] p);
    @(negedge clk);
    host_in_valid = 1;
    host_in_pkt = '{ptype: t, dst: dst, src: HOST, irq: irqf, addr: a, payload: p};
    @(posedge clk);
    while (!host_in_ready) @(posedge clk);
    @(negedge clk);
    host_in_valid = 0;
  endtask

  // ---------------- links ----------------
  mc_pkt_t link_rx [NUM_LINKS][$];
  always @(posedge clk)
    for (int l = 0; l < NUM_LINKS; l++) begin
      if (rst_n && link_out_valid[l] && link_out_ready[l]) link_rx[l].push_back(link_out_pkt[l]);
      if (rst_n && link_out_valid[l] && !link_out_ready[l]) cnt["link_backpressure"]++;
    end

  // ---------------- core bus tasks ----------------
  task automatic cwrite(input int p, input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    core_d_req[p] = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: a, wdata: d};
    @(posedge clk);
    while (!core_d_rsp[p].gnt) begin cnt["core_stall"]++; @(posedge clk); end
    @(negedge clk);
    core_d_req[p] = '0;
  endtask

  task automatic cread(input int p, input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    core_d_req[p] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: '0};
    @(posedge clk);
    while (!core_d_rsp[p].gnt) begin cnt["core_stall"]++; @(posedge clk); end
    @(negedge clk);
    core_d_req[p] = '0;
    d = core_d_rsp[p].rdata;
  endtask

  // sleep until the interrupt line shows cause `bit_i`, clear it (causes 1-3);
  // while waiting the core keeps reading its SRAM, as a polling loop would
  task automatic wait_irq(input int p, input int bit_i, output logic [31:0] irq_addr);
    logic [31:0] s, dummy;
    forever begin
      cread(p, 32'h0, dummy);
      if (core_irq[p]) begin
        cread(p, R + 8'h00, s);
        if (s[bit_i]) break;
      end
    end
    cread(p, R + 8'h08, irq_addr);
    if (bit_i > 0) cwrite(p, R + 8'h00, 32'(1) << bit_i);
  endtask

  task automatic send(input int p, input pkt_type_e t, input node_t dst, input logic irqf,
                      input logic [31:0] a, input logic [31:0] pay0);
    logic [31:0] v;
    do cread(p, R + 8'h28, v); while (v[0]);
    cwrite(p, R + 8'h10, 32'(dst));
    cwrite(p, R + 8'h14, a);
    cwrite(p, R + 8'h18, pay0);
    cwrite(p, R + 8'h28, {29'd0, irqf, 2'(t)});
  endtask

  task automatic dma_job(input int p, input logic dir, input logic [31:0] local_a, input node_t rn,
                         input logic [31:0] ra, input int len);
    logic [31:0] v;
    cwrite(p, R + 8'h50, local_a);
    cwrite(p, R + 8'h54, 32'(rn));
    cwrite(p, R + 8'h58, ra);
    cwrite(p, R + 8'h5C, 32'(len));
    cwrite(p, R + 8'h60, {30'd0, dir, 1'b1});
    wait_irq(p, 2, v);
  endtask

  // ---------------- workload data ----------------
  byte A [4][16], B [16][16];
  int  C [4][16];

  // scheduler: start on the host's interrupt, dispatch, collect flags, hand over
  task automatic scheduler();
    logic [31:0] a, f;
    int done;
    cwrite(SCHED, R + 8'h04, 32'h2);
    wait_irq(SCHED, 1, a);
    check(a == 32'h100, "scheduler started by the host");
    cnt["irq_write"]++;
    for (int w = 0; w < 4; w++) send(SCHED, PKT_WRITE, nodes[WORKER[w]], 1, 32'h0F00, 32'(w + 1));
    done = 0;
    while (done < 4) begin
      wait_irq(SCHED, 1, a);
      done = 0;
      for (int w = 0; w < 4; w++) begin
        cread(SCHED, 32'h0F00 + 16 * w, f);
        if (f == 32'h1) done++;
      end
    end
    cnt["flags_collected"]++;
    send(SCHED, PKT_WRITE, nodes[WORKER[0]], 1, 32'h0E00, 32'h1);
  endtask

  task automatic worker(input int w);
    int p = WORKER[w];
    logic [31:0] a, v, s;
    cwrite(p, R + 8'h04, 32'hA);
    wait_irq(p, 1, a);
    check(a == 32'h0F00, $sformatf("worker %0d job flag", w));
    cread(p, 32'h0F00, v);
    check(v == 32'(w + 1), $sformatf("worker %0d job word", w));
    cnt["irq_write"]++;
    cwrite(p, R + 8'h70, 32'h1000);
    cwrite(p, R + 8'h74, 32'h2000);
    cwrite(p, R + 8'h78, 32'h3000);
    cwrite(p, R + 8'h7C, 32'd4);
    cwrite(p, R + 8'h80, 32'h1);
    wait_irq(p, 3, a);
    cnt["mac_job"]++;
    send(p, PKT_WRITE, nodes[SCHED], 1, 32'h0F00 + 16 * w, 32'h1);
    if (w == 0) begin
      cwrite(p, R + 8'h04, 32'h6);
      wait_irq(p, 1, a);
      check(a == 32'h0E00, "accumulator started by the scheduler");
      for (int j = 1; j < 4; j++) begin
        dma_job(p, 1'b1, 32'h4000 + 32'h100 * j, nodes[WORKER[j]], 32'h3000, 16);
        cnt["dma_fetch_pe"]++;
      end
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 16; c++) begin
          int sum;
          cread(p, 32'h3000 + 64 * r + 4 * c, v);
          sum = int'(v);
          for (int j = 1; j < 4; j++) begin
            cread(p, 32'h4000 + 32'h100 * j + 64 * r + 4 * c, v);
            sum += int'(v);
          end
          cwrite(p, 32'h5000 + 64 * r + 4 * c, 32'(sum));
        end
      dma_job(p, 1'b0, 32'h5000, DR0, 32'h0010_0000, 16);
      cnt["dma_write_dram"]++;
      send(p, PKT_WRITE, HOST, 1, 32'h0000_0D0E, 32'h600D);
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DVFS level changes of the auto-mode PE
  logic [1:0] pl_prev;
  always @(posedge clk) begin
    if (rst_n && core_pl[MC_PE_A] != pl_prev) cnt["dvfs_switch"]++;
    pl_prev <= core_pl[MC_PE_A];
  end

  initial begin
    logic [31:0] v, a;
    for (int p = 0; p < NUM_PE; p++) begin
      core_i_req[p] = 0; core_i_addr[p] = 0; core_d_req[p] = '0;
      trng_valid[p] = 0; trng_value[p] = 0;
    end
    host_in_valid = 0; host_in_pkt = '0;
    for (int l = 0; l < NUM_LINKS; l++) begin link_in_valid[l] = 0; link_in_pkt[l] = '0; end
    for (int r = 0; r < 4; r++) for (int k = 0; k < 16; k++) A[r][k] = byte'($urandom);
    for (int k = 0; k < 16; k++) for (int c = 0; c < 16; c++) B[k][c] = byte'($urandom);
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 16; c++) begin
        C[r][c] = 0;
        for (int k = 0; k < 16; k++) C[r][c] += int'(A[r][k]) * int'(B[k][c]);
      end
    for (int i = 0; i < 8; i++) dram[1][int'((32'h0002_0000 >> 4) + i)] = {$urandom, $urandom, $urandom, $urandom};
    repeat (5) @(posedge clk);
    rst_n = 1;
    pl_prev = core_pl[MC_PE_A];

    // 1. routing table through the host: entry 0 for core events, entry 1 for link events
    host_send(PKT_WRITE, RTR, 0, 32'(64 * 0), {63'd0, 1'b1, 32'hFFFF_0000, 32'hABC0_0000});
    host_send(PKT_WRITE, RTR, 0, 32'(64 * 0 + 16), (128'b1 << 2) | (128'b1 << (6 + MC_PE_A)) | (128'b1 << (6 + MC_PE_B)));
    host_send(PKT_WRITE, RTR, 0, 32'(64 * 0 + 32), 128'd0);
    host_send(PKT_WRITE, RTR, 0, 32'(64 * 1), {63'd0, 1'b1, 32'hFF00_0000, 32'h0D00_0000});
    host_send(PKT_WRITE, RTR, 0, 32'(64 * 1 + 16), 128'b1);
    host_send(PKT_WRITE, RTR, 0, 32'(64 * 1 + 32), 128'b1 << (6 + LINK_PE - 128));
    cnt["table_write"] += 6;
    // matrices into the workers
    for (int w = 0; w < 4; w++)
      for (int k = 0; k < 4; k++) begin
        logic [127:0] col, row;
        col = '0; row = '0;
        for (int r = 0; r < 4; r++) col[8 * r +: 8] = A[r][4 * w + k];
        for (int c = 0; c < 16; c++) row[8 * c +: 8] = B[4 * w + k][c];
        host_send(PKT_WRITE, nodes[WORKER[w]], 0, 32'h1000 + 16 * k, col);
        host_send(PKT_WRITE, nodes[WORKER[w]], 0, 32'h2000 + 16 * k, row);
        cnt["host_write"] += 2;
      end

    fork
      // 2-6. the scheduled matrix product
      begin
        fork
          scheduler();
          worker(0); worker(1); worker(2); worker(3);
          begin
            repeat (20) @(posedge clk);
            host_send(PKT_WRITE, nodes[SCHED], 1, 32'h100, 128'h1);
          end
        join
      end
      // multicast from a core, to two PEs (one in automatic DVFS mode) and a link
      begin
        cwrite(MC_PE_A, R + 8'hA0, 32'h4);
        repeat (4) @(posedge clk);
        check(core_pl[MC_PE_A] == 2'd0, "auto DVFS: idle PE at PL0");
        for (int i = 0; i < 3; i++) begin
          send(MC_SRC, PKT_MC, RTR, 0, 32'hABC0_0010 + i, 32'h5000 + i);
          cnt["mc_core"]++;
        end
        repeat (300) @(posedge clk);
        cread(MC_PE_B, R + 8'h30, v);
        check(v == 3, $sformatf("three events queued at PE %0d: %0d", MC_PE_B, v));
        for (int i = 0; i < 3; i++) begin
          cread(MC_PE_B, R + 8'h34, v);
          check(v == 32'hABC0_0010 + i, "event key");
          cread(MC_PE_B, R + 8'h38, v);
          check(v == 32'h5000 + i, "event payload");
          cread(MC_PE_B, R + 8'h48, v);
          check(v == 32'(nodes[MC_SRC]), "event source");
          cwrite(MC_PE_B, R + 8'h4C, 1);
        end
        check(core_pl[MC_PE_A] == 2'd2, "auto DVFS: loaded PE at PL2");
        for (int i = 0; i < 3; i++) cwrite(MC_PE_A, R + 8'h4C, 1);
        repeat (4) @(posedge clk);
        check(core_pl[MC_PE_A] == 2'd0, "auto DVFS: back to PL0");
        check(link_rx[2].size() == 3 && link_rx[2][0].key == 32'hABC0_0010 && link_rx[2][2].payload[31:0] == 32'h5002,
              "events copied to link 2");
        cnt["mc_link_out"] += link_rx[2].size();
        // key without a route
        host_send(PKT_MC, RTR, 0, 32'h7777_0000, 128'h0);
        repeat (50) @(posedge clk);
        check(mc_drop_count == 1, "unrouted key dropped");
        cnt["mc_drop"] += int'(mc_drop_count);
      end
      // event arriving on a chip link, delivered to a PE and forwarded to link 0
      begin
        cwrite(LINK_PE, R + 8'h04, 32'h1);
        @(negedge clk);
        link_in_valid[4] = 1;
        link_in_pkt[4] = '{key: 32'h0D00_0042, payload: 128'hFEED};
        @(posedge clk); while (!link_in_ready[4]) @(posedge clk);
        @(negedge clk); link_in_valid[4] = 0;
        repeat (400) begin @(posedge clk); if (core_irq[LINK_PE]) break; end
        check(core_irq[LINK_PE], "event interrupt at the link's target PE");
        cread(LINK_PE, R + 8'h34, v);
        check(v == 32'h0D00_0042, "link event key");
        cread(LINK_PE, R + 8'h38, v);
        check(v == 32'hFEED, "link event payload");
        cwrite(LINK_PE, R + 8'h4C, 1);
        repeat (2) @(posedge clk);
        check(!core_irq[LINK_PE], "event interrupt gone after pop");
        check(link_rx[0].size() == 1 && link_rx[0][0].key == 32'h0D00_0042, "link event forwarded to link 0");
        cnt["mc_link_in"]++;
      end
      // DMA fetch from the second DRAM channel
      begin
        cwrite(DRAM_PE, R + 8'h04, 32'h4);
        dma_job(DRAM_PE, 1'b1, 32'h8000, DR1, 32'h0002_0000, 8);
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 4; j++) begin
            cread(DRAM_PE, 32'h8000 + 16 * i + 4 * j, v);
            check(v == dram[1][int'((32'h0002_0000 >> 4) + i)][32 * j +: 32], "DRAM1 fetch");
          end
        cnt["dma_fetch_dram"]++;
      end
      // accelerators of one PE
      begin
        cwrite(ACC_PE, R + 8'h90, 32'h0000_8000);          // exp(1.0)
        cread(ACC_PE, R + 8'h90, v);
        check(v > 32'd89073 - 32'd40 && v < 32'd89073 + 32'd40, $sformatf("exp(1) = %0d / 2^15", v));
        cnt["exp"]++;
        cwrite(ACC_PE, R + 8'h94, 32'd89073);              // ln(e)
        cread(ACC_PE, R + 8'h94, v);
        check(v > 32'd32768 - 32'd40 && v < 32'd32768 + 32'd40, $sformatf("ln(e) = %0d / 2^15", v));
        cnt["log"]++;
        cwrite(ACC_PE, R + 8'h98, 32'd1);
        cread(ACC_PE, R + 8'h98, v);
        cread(ACC_PE, R + 8'h98, v);
        check(v == 32'h0004_2021, "xorshift32 after seed 1");
        cnt["prng"]++;
        @(negedge clk); trng_valid[ACC_PE] = 1; trng_value[ACC_PE] = 32'h5EED_1234;
        @(negedge clk); trng_valid[ACC_PE] = 0;
        cread(ACC_PE, R + 8'h9C, v);
        check(v == 32'h5EED_1234, "TRNG word");
        cnt["trng"]++;
      end
    join

    // 6. the host reads the result
    repeat (400) begin @(posedge clk); if (host_rx.size() > 0) break; end
    check(host_rx.size() == 1 && host_rx[0].ptype == PKT_WRITE && host_rx[0].irq &&
          host_rx[0].payload[31:0] == 32'h600D && host_rx[0].src == nodes[WORKER[0]], "host notified");
    host_rx.delete();
    for (int i = 0; i < 16; i++) begin
      host_send(PKT_READ_REQ, DR0, 0, 32'h0010_0000 + 16 * i, 128'(32'h9000 + 16 * i));
      host_send(PKT_READ_REQ, nodes[WORKER[0]], 0, 32'h5000 + 16 * i, 128'(32'hA000 + 16 * i));
    end
    repeat (2000) begin @(posedge clk); if (host_rx.size() == 32) break; end
    check(host_rx.size() == 32, $sformatf("read responses: %0d", host_rx.size()));
    foreach (host_rx[n]) begin
      int i, r, c0;
      i = int'(host_rx[n].addr[7:4]);
      r = i / 4; c0 = 4 * (i % 4);
      check(host_rx[n].ptype == PKT_READ_RESP, "response type");
      for (int j = 0; j < 4; j++)
        check(host_rx[n].payload[32 * j +: 32] == 32'(C[r][c0 + j]),
              $sformatf("C[%0d][%0d] from %s", r, c0 + j, host_rx[n].addr[15:12] == 4'h9 ? "DRAM" : "SRAM"));
      if (host_rx[n].addr[15:12] == 4'h9) cnt["read_dram"]++; else cnt["read_pe"]++;
    end
    check(mc_route_count == 4, $sformatf("routed events %0d", mc_route_count));

    foreach (cnt[k]) $display("mechanism %-18s %0d", k, cnt[k]);
    foreach (cnt[k]) check(cnt[k] > 0, {"mechanism never happened: ", k});
    begin
      string need [20] = '{"table_write", "host_write", "irq_write", "flags_collected", "mac_job",
                           "dma_fetch_pe", "dma_write_dram", "dma_fetch_dram", "read_dram", "read_pe",
                           "mc_core", "mc_link_in", "mc_link_out", "mc_drop", "dvfs_switch",
                           "core_stall", "host_backpressure", "link_backpressure", "dram_stall", "exp"};
      foreach (need[k]) check(cnt.exists(need[k]), {"mechanism never happened: ", need[k]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
