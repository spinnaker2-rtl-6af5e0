// s2_pkg -- types and constants shared by the SpiNNaker2 chip RTL.
//
// Everything that crosses a module boundary is defined here: the on-chip
// network packet, the chip-link multicast packet, the 32-bit core bus, the
// node address of every NoC endpoint and the placement of the 38 quad-PEs
// (QPEs) in the 7 x 6 router mesh.
//
// From the paper: 152 cores, 4 PEs per QPE, 128 kB SRAM per PE, 32-bit core
// buses, 128-bit payloads, 32-bit multicast keys and 6 chip links.  The mesh
// placement is read from the chip floor-plan drawing (38 QPE sites, the
// SpiNNaker router in column 3 rows 2-3, an empty area in column 6 rows 2-3).
// The packet field layout, the type encoding and the node address format are
// this design's own choices.
package s2_pkg;

  localparam int unsigned DATA_W     = 128;      // NoC payload / SRAM wide port
  localparam int unsigned CORE_W     = 32;       // core instruction and data bus
  localparam int unsigned KEY_W      = 32;       // multicast routing key
  localparam int unsigned SRAM_BYTES = 131072;   // 128 kB per PE
  localparam int unsigned SRAM_WORDS = SRAM_BYTES / (DATA_W / 8);  // 8192 x 128 bit
  localparam int unsigned SRAM_AW    = $clog2(SRAM_WORDS);         // 13
  localparam int unsigned NUM_LINKS  = 6;
  localparam int unsigned MESH_X     = 7;
  localparam int unsigned MESH_Y     = 6;
  localparam int unsigned NUM_QPE    = 38;
  localparam int unsigned NUM_PE     = 4 * NUM_QPE;  // 152

  // Node address of a NoC endpoint.  sub 0..3 selects a PE of the QPE at
  // (x, y); sub 4..7 leaves the mesh through that router's N/E/S/W port,
  // which is how the edge-attached endpoints (DRAM, host) are reached.
  typedef struct packed {
    logic [2:0] x;
    logic [2:0] y;
    logic [2:0] sub;
  } node_t;

  localparam logic [2:0] SUB_N = 3'd4;
  localparam logic [2:0] SUB_E = 3'd5;
  localparam logic [2:0] SUB_S = 3'd6;
  localparam logic [2:0] SUB_W = 3'd7;

  typedef enum logic [1:0] {
    PKT_WRITE     = 2'd0,   // write payload to the 128-bit word at addr
    PKT_READ_REQ  = 2'd1,   // read word at addr, answer to src at payload[31:0]
    PKT_READ_RESP = 2'd2,   // read data; addr is the requester's local address
    PKT_MC        = 2'd3    // multicast event, addr holds the 32-bit key
  } pkt_type_e;

  typedef struct packed {
    pkt_type_e           ptype;
    node_t               dst;
    node_t               src;
    logic                irq;      // raise an interrupt at dst after a write
    logic [31:0]         addr;     // byte address, or multicast key
    logic [DATA_W-1:0]   payload;
  } noc_pkt_t;

  // Packet on a chip-to-chip link (multicast only).
  typedef struct packed {
    logic [KEY_W-1:0]    key;
    logic [DATA_W-1:0]   payload;
  } mc_pkt_t;

  // Core data bus: request held until gnt; rvalid one cycle after gnt.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } core_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } core_rsp_t;

  // Fixed nodes of the non-PE endpoints.
  localparam node_t ROUTER_NODE = '{x: 3'd3, y: 3'd2, sub: 3'd0};
  localparam node_t DRAM0_NODE  = '{x: 3'd0, y: 3'd1, sub: SUB_W};
  localparam node_t DRAM1_NODE  = '{x: 3'd0, y: 3'd4, sub: SUB_W};
  localparam node_t HOST_NODE   = '{x: 3'd5, y: 3'd0, sub: SUB_N};

  // Mesh sites that hold no QPE: the SpiNNaker router and the empty area.
  function automatic logic is_qpe_site(int unsigned x, int unsigned y);
    return !(((x == 3) || (x == 6)) && ((y == 2) || (y == 3)));
  endfunction

  // QPEs are numbered row by row over the QPE sites.
  function automatic int unsigned qpe_x(int unsigned q);
    int unsigned n = 0;
    int unsigned rx = 0;
    for (int unsigned y = 0; y < MESH_Y; y++)
      for (int unsigned x = 0; x < MESH_X; x++)
        if (is_qpe_site(x, y)) begin
          if (n == q) rx = x;
          n++;
        end
    return rx;
  endfunction

  function automatic int unsigned qpe_y(int unsigned q);
    int unsigned n = 0;
    int unsigned ry = 0;
    for (int unsigned y = 0; y < MESH_Y; y++)
      for (int unsigned x = 0; x < MESH_X; x++)
        if (is_qpe_site(x, y)) begin
          if (n == q) ry = y;
          n++;
        end
    return ry;
  endfunction

  // QPE number of the QPE site (x, y)
  function automatic int unsigned qpe_index(int unsigned qx, int unsigned qy);
    int unsigned n = 0;
    int unsigned r = 0;
    for (int unsigned y = 0; y < MESH_Y; y++)
      for (int unsigned x = 0; x < MESH_X; x++)
        if (is_qpe_site(x, y)) begin
          if (x == qx && y == qy) r = n;
          n++;
        end
    return r;
  endfunction

  // Node of global PE number p (PE p is PE p%4 of QPE p/4).
  function automatic node_t pe_node(int unsigned p);
    node_t n;
    n.x   = 3'(qpe_x(p / 4));
    n.y   = 3'(qpe_y(p / 4));
    n.sub = 3'(p % 4);
    return n;
  endfunction

endpackage
