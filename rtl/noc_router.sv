// noc_router -- network-on-chip router of one quad-PE site.
//
// The paper's chip has one NoC router per QPE, meshed across the die, giving
// point-to-point transfers between cores and access to DRAM.  Its internals
// are not given; this router is a simple single-flit design:
//   ports 0..3  the four PEs of the QPE (or other local endpoints)
//   port 4/5/6/7  north / east / south / west neighbours
// Every input has a FIFO_DEPTH-entry FIFO.  The head packet is routed X
// first, then Y (y grows southward); at the destination router dst.sub picks
// the output: 0..3 a local port, 4..7 the matching mesh port, which lets
// packets leave the mesh at its edge (DRAM, host).  Each output has a
// round-robin arbiter over the inputs whose head wants it.  A packet moves
// one hop per cycle when the next FIFO has room.  XY routing on a mesh
// cannot deadlock by itself; request/response traffic shares the network.
module noc_router
  import s2_pkg::*;
#(
  parameter int unsigned MY_X       = 0,
  parameter int unsigned MY_Y       = 0,
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid [8],
  output logic     in_ready [8],
  input  noc_pkt_t in_pkt   [8],
  output logic     out_valid [8],
  input  logic     out_ready [8],
  output noc_pkt_t out_pkt   [8]
);
  localparam int unsigned PW = $bits(noc_pkt_t);

  logic     h_valid [8];
  logic     h_pop   [8];
  noc_pkt_t h_pkt   [8];
  logic [2:0] h_port [8];
  logic [$clog2(FIFO_DEPTH+1)-1:0] h_level [8];   // not used here

  for (genvar i = 0; i < 8; i++) begin : g_in
    sync_fifo #(.WIDTH(PW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_valid (in_valid[i]), .wr_ready (in_ready[i]), .wr_data (in_pkt[i]),
      .rd_valid (h_valid[i]), .rd_ready (h_pop[i]), .rd_data (h_pkt[i]),
      .level (h_level[i])
    );
    always_comb begin
      if (32'(h_pkt[i].dst.x) > MY_X)      h_port[i] = 3'd5;
      else if (32'(h_pkt[i].dst.x) < MY_X) h_port[i] = 3'd7;
      else if (32'(h_pkt[i].dst.y) > MY_Y) h_port[i] = 3'd6;
      else if (32'(h_pkt[i].dst.y) < MY_Y) h_port[i] = 3'd4;
      else                                 h_port[i] = h_pkt[i].dst.sub;
    end
  end

  logic [7:0] req   [8];   // req[o][i]: input i wants output o
  logic [7:0] grant [8];

  for (genvar o = 0; o < 8; o++) begin : g_out
    always_comb begin
      for (int unsigned i = 0; i < 8; i++)
        req[o][i] = h_valid[i] && (h_port[i] == 3'(o));
    end
    rr_arbiter #(.N(8)) u_arb (
      .clk, .rst_n, .req (req[o]), .accept (out_ready[o]), .grant (grant[o])
    );
    always_comb begin
      out_valid[o] = (grant[o] != '0);
      out_pkt[o]   = '0;
      for (int unsigned i = 0; i < 8; i++)
        if (grant[o][i]) out_pkt[o] = h_pkt[i];
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < 8; i++)
      h_pop[i] = grant[h_port[i]][i] && out_ready[h_port[i]];
  end
endmodule
