// spinn_router -- the chip's SpiNNaker multicast packet router.
//
// Spikes and other events travel as multicast (MC) packets: a 32-bit key
// naming the source (e.g. the spiking neuron) plus a payload of up to 128
// bits.  The router receives MC packets from the PEs over the NoC and from
// the six chip-to-chip links, looks the key up in a configurable routing
// table and sends a copy to every link and every PE the matching entry
// names.  Router, table, six links, 32-bit key and 128-bit payload are from
// the paper; the table format and the copy mechanism are this design's own:
//   * entry e: valid, key, mask, route[N_LINKS+N_PE-1:0]; a packet
//     matches when (pkt.key & mask) == key; the lowest matching entry wins;
//     route bits 0..5 are links, bit 6+p is PE p;
//   * no match: the packet is dropped and drop_count increments;
//   * the table is written with NoC WRITE packets addressed to this router:
//     byte address 64*e + 16*f, f = 0 {valid[64], mask[63:32], key[31:0]},
//     f = 1 route[127:0], f = 2 route[N_LINKS+N_PE-1:128];
//   * inputs (NoC, links 0..5) are served round-robin, one packet at a time:
//     1 cycle to accept, 1 cycle to look up, then one copy per cycle
//     (links and PEs in bit order) as the outputs accept.
module spinn_router
  import s2_pkg::*;
#(
  parameter int unsigned ENTRIES   = 1024,
  parameter int unsigned N_LINKS = s2_pkg::NUM_LINKS,
  parameter int unsigned N_PE    = s2_pkg::NUM_PE
) (
  input  logic     clk,
  input  logic     rst_n,
  // NoC attachment
  input  logic     rx_valid,
  output logic     rx_ready,
  input  noc_pkt_t rx_pkt,
  output logic     tx_valid,
  input  logic     tx_ready,
  output noc_pkt_t tx_pkt,
  // chip links
  input  logic     link_in_valid  [N_LINKS],
  output logic     link_in_ready  [N_LINKS],
  input  mc_pkt_t  link_in_pkt    [N_LINKS],
  output logic     link_out_valid [N_LINKS],
  input  logic     link_out_ready [N_LINKS],
  output mc_pkt_t  link_out_pkt   [N_LINKS],
  // statistics
  output logic [15:0] drop_count,
  output logic [15:0] route_count
);
  localparam int unsigned RW = N_LINKS + N_PE;
  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned NI = N_LINKS + 1;

  logic          t_valid [ENTRIES];
  logic [31:0]   t_key   [ENTRIES];
  logic [31:0]   t_mask  [ENTRIES];
  logic [RW-1:0] t_route [ENTRIES];

  node_t pe_nodes [N_PE];
  for (genvar p = 0; p < N_PE; p++) begin : g_map
    assign pe_nodes[p] = pe_node(p);
  end

  typedef enum logic [1:0] {S_IDLE, S_LOOK, S_EMIT} state_e;
  state_e state;

  mc_pkt_t       cur;
  logic [RW-1:0] remain;

  // ---------------------------------------------------------------
  // input selection
  logic [NI-1:0] in_req, in_gnt;
  always_comb begin
    in_req[0] = rx_valid;
    for (int unsigned l = 0; l < N_LINKS; l++) in_req[1+l] = link_in_valid[l];
  end
  rr_arbiter #(.N(NI)) u_arb (.clk, .rst_n, .req (in_req), .accept (state == S_IDLE), .grant (in_gnt));

  assign rx_ready = (state == S_IDLE) && in_gnt[0];
  always_comb begin
    for (int unsigned l = 0; l < N_LINKS; l++)
      link_in_ready[l] = (state == S_IDLE) && in_gnt[1+l];
  end

  wire cfg_wr = rx_valid && rx_ready && rx_pkt.ptype == PKT_WRITE;
  wire noc_mc = rx_valid && rx_ready && rx_pkt.ptype == PKT_MC;
  logic link_take;
  mc_pkt_t link_sel;
  always_comb begin
    link_take = 1'b0;
    link_sel  = '0;
    for (int unsigned l = 0; l < N_LINKS; l++)
      if (link_in_valid[l] && link_in_ready[l]) begin
        link_take = 1'b1;
        link_sel  = link_in_pkt[l];
      end
  end

  // ---------------------------------------------------------------
  // table lookup: lowest matching valid entry
  logic          hit_c;
  logic [RW-1:0] route_c;
  always_comb begin
    hit_c   = 1'b0;
    route_c = '0;
    for (int i = int'(ENTRIES) - 1; i >= 0; i--)
      if (t_valid[i] && ((cur.key & t_mask[i]) == t_key[i])) begin
        hit_c   = 1'b1;
        route_c = t_route[i];
      end
  end

  // ---------------------------------------------------------------
  // copy emission: lowest remaining route bit
  logic          any_c;
  logic [$clog2(RW)-1:0] bit_c;
  always_comb begin
    any_c = 1'b0;
    bit_c = '0;
    for (int i = int'(RW) - 1; i >= 0; i--)
      if (remain[i]) begin
        any_c = 1'b1;
        bit_c = $clog2(RW)'(i);
      end
  end

  wire to_link = (32'(bit_c) < N_LINKS);
  logic emit_ok;
  always_comb begin
    for (int unsigned l = 0; l < N_LINKS; l++) begin
      link_out_valid[l] = (state == S_EMIT) && any_c && to_link && (32'(bit_c) == l);
      link_out_pkt[l]   = cur;
    end
    tx_valid       = (state == S_EMIT) && any_c && !to_link;
    tx_pkt         = '0;
    tx_pkt.ptype   = PKT_MC;
    tx_pkt.src     = ROUTER_NODE;
    tx_pkt.dst     = pe_nodes[to_link ? 0 : 32'(bit_c) - N_LINKS];
    tx_pkt.addr    = cur.key;
    tx_pkt.payload = cur.payload;
    emit_ok        = tx_ready;
    for (int unsigned l = 0; l < N_LINKS; l++)
      if (to_link && 32'(bit_c) == l) emit_ok = link_out_ready[l];
  end

  // ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cur         <= '0;
      remain      <= '0;
      drop_count  <= '0;
      route_count <= '0;
      for (int unsigned e = 0; e < ENTRIES; e++) t_valid[e] <= 1'b0;
    end else begin
      case (state)
        S_IDLE: begin
          if (noc_mc) begin
            cur   <= '{key: rx_pkt.addr, payload: rx_pkt.payload};
            state <= S_LOOK;
          end else if (link_take) begin
            cur   <= link_sel;
            state <= S_LOOK;
          end
        end
        S_LOOK: begin
          if (hit_c && route_c != '0) begin
            remain      <= route_c;
            route_count <= route_count + 1'b1;
            state       <= S_EMIT;
          end else begin
            drop_count <= drop_count + 1'b1;
            state      <= S_IDLE;
          end
        end
        S_EMIT: begin
          if (!any_c) state <= S_IDLE;
          else if (emit_ok) remain[bit_c] <= 1'b0;
        end
        default: state <= S_IDLE;
      endcase
      if (cfg_wr && rx_pkt.addr[5:4] == 2'd0) t_valid[rx_pkt.addr[6 +: IW]] <= rx_pkt.payload[64];
    end
  end

  // table contents (no reset needed: entries are qualified by t_valid)
  always_ff @(posedge clk) begin
    if (cfg_wr) begin
      case (rx_pkt.addr[5:4])
        2'd0: begin
          t_key[rx_pkt.addr[6 +: IW]]  <= rx_pkt.payload[31:0];
          t_mask[rx_pkt.addr[6 +: IW]] <= rx_pkt.payload[63:32];
        end
        2'd1: t_route[rx_pkt.addr[6 +: IW]][127:0] <= rx_pkt.payload;
        2'd2: t_route[rx_pkt.addr[6 +: IW]][RW-1:128] <= rx_pkt.payload[RW-129:0];
        default: ;
      endcase
    end
  end
endmodule
