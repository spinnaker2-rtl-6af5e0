// qpe -- quad processing element: four PEs sharing one NoC router.
//
// The QPE is the tile the chip is built from (the paper's floor plan shows a
// grid of them, each around one NoC router).  PE k of the QPE at mesh site
// (QX, QY) has node address (QX, QY, k) and sits on router port k; router
// ports N/E/S/W (index 0..3 here) are the mesh ports of the tile.
module qpe
  import s2_pkg::*;
#(
  parameter int unsigned QX       = 0,
  parameter int unsigned QY       = 0,
  parameter int unsigned MAC_ROWS = 4,
  parameter int unsigned MAC_COLS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // core buses of the four PEs
  input  logic        i_req    [4],
  input  logic [31:0] i_addr   [4],
  output logic        i_gnt    [4],
  output logic        i_rvalid [4],
  output logic [31:0] i_rdata  [4],
  input  core_req_t   d_req    [4],
  output core_rsp_t   d_rsp    [4],
  output logic        irq      [4],
  output logic        core_clk_en [4],
  output logic [1:0]  pl       [4],
  input  logic        trng_valid [4],
  input  logic [31:0] trng_value [4],
  // mesh ports, index 0..3 = N, E, S, W
  input  logic        m_in_valid  [4],
  output logic        m_in_ready  [4],
  input  noc_pkt_t    m_in_pkt    [4],
  output logic        m_out_valid [4],
  input  logic        m_out_ready [4],
  output noc_pkt_t    m_out_pkt   [4]
);
  logic     r_in_valid [8], r_in_ready [8], r_out_valid [8], r_out_ready [8];
  noc_pkt_t r_in_pkt [8], r_out_pkt [8];

  for (genvar k = 0; k < 4; k++) begin : g_pe
    pe #(.NODE({3'(QX), 3'(QY), 3'(k)}), .MAC_ROWS(MAC_ROWS), .MAC_COLS(MAC_COLS)) u_pe (
      .clk, .rst_n,
      .i_req (i_req[k]), .i_addr (i_addr[k]), .i_gnt (i_gnt[k]), .i_rvalid (i_rvalid[k]), .i_rdata (i_rdata[k]),
      .d_req (d_req[k]), .d_rsp (d_rsp[k]),
      .irq (irq[k]), .core_clk_en (core_clk_en[k]), .pl (pl[k]),
      .trng_valid (trng_valid[k]), .trng_value (trng_value[k]),
      .rx_valid (r_out_valid[k]), .rx_ready (r_out_ready[k]), .rx_pkt (r_out_pkt[k]),
      .tx_valid (r_in_valid[k]),  .tx_ready (r_in_ready[k]),  .tx_pkt (r_in_pkt[k])
    );
    assign r_in_valid[4+k]  = m_in_valid[k];
    assign m_in_ready[k]    = r_in_ready[4+k];
    assign r_in_pkt[4+k]    = m_in_pkt[k];
    assign m_out_valid[k]   = r_out_valid[4+k];
    assign r_out_ready[4+k] = m_out_ready[k];
    assign m_out_pkt[k]     = r_out_pkt[4+k];
  end

  noc_router #(.MY_X(QX), .MY_Y(QY)) u_router (
    .clk, .rst_n,
    .in_valid (r_in_valid), .in_ready (r_in_ready), .in_pkt (r_in_pkt),
    .out_valid (r_out_valid), .out_ready (r_out_ready), .out_pkt (r_out_pkt)
  );
endmodule
