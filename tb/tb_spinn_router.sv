// tb_spinn_router -- programs the multicast routing table through NoC
// writes and checks the copies produced for packets from the NoC and from
// the links: every link and PE named by the lowest matching entry gets
// exactly one copy with key and payload intact; unmatched keys are dropped
// and counted; an entry can be invalidated; packets arriving on several
// links at once are all served.  The PE-to-node map is recomputed here from
// the floor plan (7 x 6 sites, no QPE at (3,2), (3,3), (6,2), (6,3)).
module tb_spinn_router;
  import s2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rx_valid = 0, rx_ready, tx_valid, tx_ready;
  noc_pkt_t rx_pkt = '0, tx_pkt;
  logic link_in_valid [6], link_in_ready [6], link_out_valid [6], link_out_ready [6];
  mc_pkt_t link_in_pkt [6], link_out_pkt [6];
  logic [15:0] drop_count, route_count;

  spinn_router dut (.*);

  logic rr;
  always_ff @(posedge clk) rr <= 1'($urandom_range(0, 1));
  assign tx_ready = rr;
  for (genvar l = 0; l < 6; l++) begin : g_l
    assign link_out_ready[l] = rr;
  end

  // independent PE -> node map
  node_t nodes [152];
  initial begin
    int n = 0;
    for (int y = 0; y < 6; y++)
      for (int x = 0; x < 7; x++)
        if (!((x == 3 || x == 6) && (y == 2 || y == 3))) begin
          for (int k = 0; k < 4; k++) nodes[4 * n + k] = '{x: 3'(x), y: 3'(y), sub: 3'(k)};
          n++;
        end
  end

  // received copies: strings "L<link>:<key>" / "P<node>:<key>"
  int got [string];
  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) begin
      got[$sformatf("N%0d:%h:%h", tx_pkt.dst, tx_pkt.addr, tx_pkt.payload[31:0])]++;
      if (tx_pkt.ptype != PKT_MC || tx_pkt.src != ROUTER_NODE) begin failures++; $display("FAIL: copy header"); end
    end
    for (int l = 0; l < 6; l++)
      if (rst_n && link_out_valid[l] && link_out_ready[l])
        got[$sformatf("L%0d:%h:%h", l, link_out_pkt[l].key, link_out_pkt[l].payload[31:0])]++;
  end

  task automatic check(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic noc_send(input pkt_type_e t, input logic [31:0] a, input logic [127:0] p);
    @(negedge clk);
    rx_valid = 1;
    rx_pkt = '{ptype: t, dst: ROUTER_NODE, src: '0, irq: 1'b0, addr: a, payload: p};
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    @(negedge clk);
    rx_valid = 0;
  endtask

  task automatic set_entry(input int e, input bit v, input logic [31:0] key, input logic [31:0] mask,
                           input logic [5:0] links, input int pes [$]);
    logic [157:0] route;
    route = '0;
    route[5:0] = links;
    foreach (pes[i]) route[6 + pes[i]] = 1'b1;
    noc_send(PKT_WRITE, 32'(64 * e), {63'd0, v, mask, key});
    noc_send(PKT_WRITE, 32'(64 * e + 16), route[127:0]);
    noc_send(PKT_WRITE, 32'(64 * e + 32), 128'(route[157:128]));
  endtask

  task automatic expect_copies(input logic [31:0] key, input logic [31:0] pay, input logic [5:0] links, input int pes [$]);
    repeat (400) @(posedge clk);
    for (int l = 0; l < 6; l++) begin
      string s = $sformatf("L%0d:%h:%h", l, key, pay);
      check((got.exists(s) ? got[s] : 0) == (links[l] ? 1 : 0), {"link copy ", s});
    end
    foreach (pes[i]) begin
      string s = $sformatf("N%0d:%h:%h", nodes[pes[i]], key, pay);
      check(got.exists(s) && got[s] == 1, {"PE copy ", s});
    end
    check(got.size() == $countones(links) + pes.size(), $sformatf("number of copies %0d", got.size()));
    got.delete();
  endtask

  initial begin
    for (int l = 0; l < 6; l++) begin link_in_valid[l] = 0; link_in_pkt[l] = '0; end
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    set_entry(0, 1, 32'h100, 32'hFFFF_FF00, 6'b001010, '{0, 151});
    set_entry(1, 1, 32'h200, 32'hFFFF_FFFF, 6'b000000, '{5});
    set_entry(2, 1, 32'h0100_0000, 32'hFF00_0000, 6'b100000, '{});
    set_entry(3, 1, 32'h100, 32'hFFFF_FF00, 6'b000001, '{77});   // shadowed by entry 0
    set_entry(1023, 1, 32'hBEEF, 32'hFFFF_FFFF, 6'b000100, '{100, 101, 102, 103});
    // from the NoC
    noc_send(PKT_MC, 32'h123, 128'h77);
    expect_copies(32'h123, 32'h77, 6'b001010, '{0, 151});
    noc_send(PKT_MC, 32'h0142_0000, 128'h1);
    expect_copies(32'h0142_0000, 32'h1, 6'b100000, '{});
    noc_send(PKT_MC, 32'hBEEF, 128'h2);
    expect_copies(32'hBEEF, 32'h2, 6'b000100, '{100, 101, 102, 103});
    // from a link
    @(negedge clk);
    link_in_valid[2] = 1; link_in_pkt[2] = '{key: 32'h200, payload: 128'h3};
    @(posedge clk); while (!link_in_ready[2]) @(posedge clk);
    @(negedge clk); link_in_valid[2] = 0;
    expect_copies(32'h200, 32'h3, 6'b0, '{5});
    // unmatched key
    noc_send(PKT_MC, 32'h999, 128'h4);
    repeat (20) @(posedge clk);
    check(drop_count == 1 && got.size() == 0, "unmatched dropped and counted");
    // invalidate entry 1
    noc_send(PKT_WRITE, 32'(64 * 1), {63'd0, 1'b0, 32'hFFFF_FFFF, 32'h200});
    noc_send(PKT_MC, 32'h200, 128'h5);
    repeat (20) @(posedge clk);
    check(drop_count == 2 && got.size() == 0, "invalidated entry no longer routes");
    // all six links at once
    @(negedge clk);
    for (int l = 0; l < 6; l++) begin link_in_valid[l] = 1; link_in_pkt[l] = '{key: 32'h100 + l, payload: 128'(l)}; end
    fork
      for (int l = 0; l < 6; l++)
        fork
          automatic int ll = l;
          begin
            @(posedge clk); while (!link_in_ready[ll]) @(posedge clk);
            #1 link_in_valid[ll] = 0;
          end
        join_none
      wait fork;
    join
    repeat (400) @(posedge clk);
    check(got.size() == 6 * 4, $sformatf("copies of six link packets: %0d", got.size()));
    check(route_count == 10, $sformatf("routed packet count %0d", route_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
