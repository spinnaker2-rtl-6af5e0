// spinnaker2_chip -- top level of the SpiNNaker2 chip logic.
//
// 152 processing elements in 38 quad-PEs (QPEs) sit on a 7 x 6 mesh of NoC
// routers.  The SpiNNaker multicast router with its six chip links occupies
// mesh site (3,2); site (3,3) and sites (6,2), (6,3) carry no QPE.  Two DRAM
// bridges hang off the west edge at rows 1 and 4, and the host (Ethernet)
// port off the north edge at column 5.  This placement is read from the
// paper's chip floor plan; the node addresses are in s2_pkg.
//
// What is outside and appears as ports: the 152 ARM cores (instruction bus,
// data bus, IRQ, clock enable, performance level), the true random noise
// sources, the six SerDes chip
// links (packet level), the Ethernet host interface (packet level, NoC
// packets) and the two LPDDR4 controllers (128-bit memory ports).
// Core p is PE p%4 of QPE p/4; QPEs are numbered row by row over the sites.
module spinnaker2_chip
  import s2_pkg::*;
#(
  parameter int unsigned ROUTER_ENTRIES = 1024,
  parameter int unsigned MAC_ROWS       = 4,
  parameter int unsigned MAC_COLS       = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // processor cores
  input  logic        core_i_req    [NUM_PE],
  input  logic [31:0] core_i_addr   [NUM_PE],
  output logic        core_i_gnt    [NUM_PE],
  output logic        core_i_rvalid [NUM_PE],
  output logic [31:0] core_i_rdata  [NUM_PE],
  input  core_req_t   core_d_req    [NUM_PE],
  output core_rsp_t   core_d_rsp    [NUM_PE],
  output logic        core_irq      [NUM_PE],
  output logic        core_clk_en   [NUM_PE],
  output logic [1:0]  core_pl       [NUM_PE],
  // true random sources, one per PE (physical noise sources)
  input  logic        trng_valid    [NUM_PE],
  input  logic [31:0] trng_value    [NUM_PE],
  // host (Ethernet) port
  input  logic        host_in_valid,
  output logic        host_in_ready,
  input  noc_pkt_t    host_in_pkt,
  output logic        host_out_valid,
  input  logic        host_out_ready,
  output noc_pkt_t    host_out_pkt,
  // chip-to-chip links
  input  logic        link_in_valid  [NUM_LINKS],
  output logic        link_in_ready  [NUM_LINKS],
  input  mc_pkt_t     link_in_pkt    [NUM_LINKS],
  output logic        link_out_valid [NUM_LINKS],
  input  logic        link_out_ready [NUM_LINKS],
  output mc_pkt_t     link_out_pkt   [NUM_LINKS],
  // DRAM channels
  output logic        dram_req    [2],
  output logic        dram_we     [2],
  output logic [31:0] dram_addr   [2],
  output logic [DATA_W-1:0] dram_wdata [2],
  input  logic        dram_gnt    [2],
  input  logic        dram_rvalid [2],
  input  logic [DATA_W-1:0] dram_rdata [2],
  // multicast router statistics
  output logic [15:0] mc_drop_count,
  output logic [15:0] mc_route_count
);
  // router port p of site (x, y): 0..3 local, 4 N, 5 E, 6 S, 7 W
  logic     in_valid  [MESH_X][MESH_Y][8];
  logic     in_ready  [MESH_X][MESH_Y][8];
  noc_pkt_t in_pkt    [MESH_X][MESH_Y][8];
  logic     out_valid [MESH_X][MESH_Y][8];
  logic     out_ready [MESH_X][MESH_Y][8];
  noc_pkt_t out_pkt   [MESH_X][MESH_Y][8];

  // endpoints off the mesh edges and local endpoints of non-QPE sites
  logic     rtr_tx_valid, rtr_tx_ready, rtr_rx_valid, rtr_rx_ready;
  noc_pkt_t rtr_tx_pkt, rtr_rx_pkt;
  logic     dr_tx_valid [2], dr_tx_ready [2], dr_rx_valid [2], dr_rx_ready [2];
  noc_pkt_t dr_tx_pkt [2], dr_rx_pkt [2];

  for (genvar x = 0; x < MESH_X; x++) begin : g_x
    for (genvar y = 0; y < MESH_Y; y++) begin : g_y
      // ---------------- tile ----------------
      if (is_qpe_site(x, y)) begin : g_qpe
        localparam int unsigned Q = qpe_index(x, y);
        logic        m_in_valid [4], m_in_ready [4], m_out_valid [4], m_out_ready [4];
        noc_pkt_t    m_in_pkt [4], m_out_pkt [4];
        logic        q_i_req [4], q_i_gnt [4], q_i_rvalid [4], q_irq [4], q_clk_en [4];
        logic [31:0] q_i_addr [4], q_i_rdata [4];
        core_req_t   q_d_req [4];
        core_rsp_t   q_d_rsp [4];
        logic [1:0]  q_pl [4];
        logic        q_trng_valid [4];
        logic [31:0] q_trng_value [4];
        for (genvar k = 0; k < 4; k++) begin : g_k
          assign q_i_req[k]                = core_i_req[4*Q+k];
          assign q_i_addr[k]               = core_i_addr[4*Q+k];
          assign q_d_req[k]                = core_d_req[4*Q+k];
          assign core_i_gnt[4*Q+k]         = q_i_gnt[k];
          assign core_i_rvalid[4*Q+k]      = q_i_rvalid[k];
          assign core_i_rdata[4*Q+k]       = q_i_rdata[k];
          assign core_d_rsp[4*Q+k]         = q_d_rsp[k];
          assign core_irq[4*Q+k]           = q_irq[k];
          assign core_clk_en[4*Q+k]        = q_clk_en[k];
          assign core_pl[4*Q+k]            = q_pl[k];
          assign q_trng_valid[k]           = trng_valid[4*Q+k];
          assign q_trng_value[k]           = trng_value[4*Q+k];
          assign m_in_valid[k]             = in_valid[x][y][4+k];
          assign in_ready[x][y][4+k]       = m_in_ready[k];
          assign m_in_pkt[k]               = in_pkt[x][y][4+k];
          assign out_valid[x][y][4+k]      = m_out_valid[k];
          assign m_out_ready[k]            = out_ready[x][y][4+k];
          assign out_pkt[x][y][4+k]        = m_out_pkt[k];
          // local ports are inside the QPE
          assign in_ready[x][y][k]         = 1'b0;
          assign out_valid[x][y][k]        = 1'b0;
          assign out_pkt[x][y][k]          = '0;
        end
        qpe #(.QX(x), .QY(y), .MAC_ROWS(MAC_ROWS), .MAC_COLS(MAC_COLS)) u_qpe (
          .clk, .rst_n,
          .i_req (q_i_req), .i_addr (q_i_addr), .i_gnt (q_i_gnt), .i_rvalid (q_i_rvalid), .i_rdata (q_i_rdata),
          .d_req (q_d_req), .d_rsp (q_d_rsp), .irq (q_irq), .core_clk_en (q_clk_en), .pl (q_pl),
          .trng_valid (q_trng_valid), .trng_value (q_trng_value),
          .m_in_valid, .m_in_ready, .m_in_pkt, .m_out_valid, .m_out_ready, .m_out_pkt
        );
      end else begin : g_site
        logic     r_in_valid [8], r_in_ready [8], r_out_valid [8], r_out_ready [8];
        noc_pkt_t r_in_pkt [8], r_out_pkt [8];
        for (genvar p = 0; p < 8; p++) begin : g_p
          assign r_in_valid[p]      = in_valid[x][y][p];
          assign in_ready[x][y][p]  = r_in_ready[p];
          assign r_in_pkt[p]        = in_pkt[x][y][p];
          assign out_valid[x][y][p] = r_out_valid[p];
          assign r_out_ready[p]     = out_ready[x][y][p];
          assign out_pkt[x][y][p]   = r_out_pkt[p];
        end
        noc_router #(.MY_X(x), .MY_Y(y)) u_router (
          .clk, .rst_n,
          .in_valid (r_in_valid), .in_ready (r_in_ready), .in_pkt (r_in_pkt),
          .out_valid (r_out_valid), .out_ready (r_out_ready), .out_pkt (r_out_pkt)
        );
      end

      // ---------------- local ports of non-QPE sites ----------------
      for (genvar k = 0; k < 4; k++) begin : g_loc
        if (32'(ROUTER_NODE.x) == x && 32'(ROUTER_NODE.y) == y && k == 0) begin : g_rtr
          assign in_valid[x][y][k]  = rtr_tx_valid;
          assign rtr_tx_ready       = in_ready[x][y][k];
          assign in_pkt[x][y][k]    = rtr_tx_pkt;
          assign rtr_rx_valid       = out_valid[x][y][k];
          assign out_ready[x][y][k] = rtr_rx_ready;
          assign rtr_rx_pkt         = out_pkt[x][y][k];
        end else begin : g_none
          assign in_valid[x][y][k]  = 1'b0;
          assign in_pkt[x][y][k]    = '0;
          assign out_ready[x][y][k] = 1'b1;   // nothing is addressed here
        end
      end

      // ---------------- north (4) ----------------
      if (y > 0) begin : g_n
        assign in_valid[x][y][4]  = out_valid[x][y-1][6];
        assign in_pkt[x][y][4]    = out_pkt[x][y-1][6];
        assign out_ready[x][y][4] = in_ready[x][y-1][6];
      end else if (32'(HOST_NODE.x) == x) begin : g_host
        assign in_valid[x][y][4]  = host_in_valid;
        assign host_in_ready      = in_ready[x][y][4];
        assign in_pkt[x][y][4]    = host_in_pkt;
        assign host_out_valid     = out_valid[x][y][4];
        assign out_ready[x][y][4] = host_out_ready;
        assign host_out_pkt       = out_pkt[x][y][4];
      end else begin : g_n_edge
        assign in_valid[x][y][4]  = 1'b0;
        assign in_pkt[x][y][4]    = '0;
        assign out_ready[x][y][4] = 1'b1;
      end
      // ---------------- south (6) ----------------
      if (y < MESH_Y - 1) begin : g_s
        assign in_valid[x][y][6]  = out_valid[x][y+1][4];
        assign in_pkt[x][y][6]    = out_pkt[x][y+1][4];
        assign out_ready[x][y][6] = in_ready[x][y+1][4];
      end else begin : g_s_edge
        assign in_valid[x][y][6]  = 1'b0;
        assign in_pkt[x][y][6]    = '0;
        assign out_ready[x][y][6] = 1'b1;
      end
      // ---------------- east (5) ----------------
      if (x < MESH_X - 1) begin : g_e
        assign in_valid[x][y][5]  = out_valid[x+1][y][7];
        assign in_pkt[x][y][5]    = out_pkt[x+1][y][7];
        assign out_ready[x][y][5] = in_ready[x+1][y][7];
      end else begin : g_e_edge
        assign in_valid[x][y][5]  = 1'b0;
        assign in_pkt[x][y][5]    = '0;
        assign out_ready[x][y][5] = 1'b1;
      end
      // ---------------- west (7) ----------------
      if (x > 0) begin : g_w
        assign in_valid[x][y][7]  = out_valid[x-1][y][5];
        assign in_pkt[x][y][7]    = out_pkt[x-1][y][5];
        assign out_ready[x][y][7] = in_ready[x-1][y][5];
      end else if (32'(DRAM0_NODE.y) == y || 32'(DRAM1_NODE.y) == y) begin : g_dram
        localparam int unsigned D = (32'(DRAM0_NODE.y) == y) ? 0 : 1;
        assign in_valid[x][y][7]  = dr_tx_valid[D];
        assign dr_tx_ready[D]     = in_ready[x][y][7];
        assign in_pkt[x][y][7]    = dr_tx_pkt[D];
        assign dr_rx_valid[D]     = out_valid[x][y][7];
        assign out_ready[x][y][7] = dr_rx_ready[D];
        assign dr_rx_pkt[D]       = out_pkt[x][y][7];
      end else begin : g_w_edge
        assign in_valid[x][y][7]  = 1'b0;
        assign in_pkt[x][y][7]    = '0;
        assign out_ready[x][y][7] = 1'b1;
      end
    end
  end

  spinn_router #(.ENTRIES(ROUTER_ENTRIES)) u_spinn_router (
    .clk, .rst_n,
    .rx_valid (rtr_rx_valid), .rx_ready (rtr_rx_ready), .rx_pkt (rtr_rx_pkt),
    .tx_valid (rtr_tx_valid), .tx_ready (rtr_tx_ready), .tx_pkt (rtr_tx_pkt),
    .link_in_valid, .link_in_ready, .link_in_pkt,
    .link_out_valid, .link_out_ready, .link_out_pkt,
    .drop_count (mc_drop_count), .route_count (mc_route_count)
  );

  dram_bridge #(.NODE(DRAM0_NODE)) u_dram0 (
    .clk, .rst_n,
    .rx_valid (dr_rx_valid[0]), .rx_ready (dr_rx_ready[0]), .rx_pkt (dr_rx_pkt[0]),
    .tx_valid (dr_tx_valid[0]), .tx_ready (dr_tx_ready[0]), .tx_pkt (dr_tx_pkt[0]),
    .mem_req (dram_req[0]), .mem_we (dram_we[0]), .mem_addr (dram_addr[0]), .mem_wdata (dram_wdata[0]),
    .mem_gnt (dram_gnt[0]), .mem_rvalid (dram_rvalid[0]), .mem_rdata (dram_rdata[0])
  );

  dram_bridge #(.NODE(DRAM1_NODE)) u_dram1 (
    .clk, .rst_n,
    .rx_valid (dr_rx_valid[1]), .rx_ready (dr_rx_ready[1]), .rx_pkt (dr_rx_pkt[1]),
    .tx_valid (dr_tx_valid[1]), .tx_ready (dr_tx_ready[1]), .tx_pkt (dr_tx_pkt[1]),
    .mem_req (dram_req[1]), .mem_we (dram_we[1]), .mem_addr (dram_addr[1]), .mem_wdata (dram_wdata[1]),
    .mem_gnt (dram_gnt[1]), .mem_rvalid (dram_rvalid[1]), .mem_rdata (dram_rdata[1])
  );
endmodule
