// dram_bridge -- NoC endpoint in front of an off-chip DRAM channel.
//
// The paper's NoC gives every core access to the node's off-chip LPDDR4
// DRAM, and DMA units move bulk data to and from it.  The LPDDR4 controller
// and PHY are vendor parts outside this RTL; this bridge turns NoC packets
// into requests on a plain 128-bit memory port for them:
//   WRITE     -> one write of payload at byte address addr
//   READ_REQ  -> one read at addr, answered with a READ_RESP to the sender
//                whose addr is the return address from payload[31:0]
//   other     -> dropped
// Memory port: hold mem_req until mem_gnt; read data returns with
// mem_rvalid any number of cycles later (one read outstanding).  The bridge
// serves one packet at a time.
module dram_bridge
  import s2_pkg::*;
#(
  parameter logic [8:0] NODE = 9'o017
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rx_valid,
  output logic          rx_ready,
  input  noc_pkt_t      rx_pkt,
  output logic          tx_valid,
  input  logic          tx_ready,
  output noc_pkt_t      tx_pkt,
  output logic          mem_req,
  output logic          mem_we,
  output logic [31:0]   mem_addr,
  output logic [DATA_W-1:0] mem_wdata,
  input  logic          mem_gnt,
  input  logic          mem_rvalid,
  input  logic [DATA_W-1:0] mem_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_WR, S_RD, S_WAIT, S_RESP} state_e;
  state_e   state;
  noc_pkt_t p;
  logic [DATA_W-1:0] rd_q;

  assign rx_ready  = (state == S_IDLE);
  assign mem_req   = (state == S_WR) || (state == S_RD);
  assign mem_we    = (state == S_WR);
  assign mem_addr  = p.addr;
  assign mem_wdata = p.payload;

  always_comb begin
    tx_valid       = (state == S_RESP);
    tx_pkt         = '0;
    tx_pkt.ptype   = PKT_READ_RESP;
    tx_pkt.dst     = p.src;
    tx_pkt.src     = node_t'(NODE);
    tx_pkt.addr    = p.payload[31:0];
    tx_pkt.payload = rd_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      p     <= '0;
      rd_q  <= '0;
    end else begin
      case (state)
        S_IDLE: if (rx_valid) begin
          p <= rx_pkt;
          if (rx_pkt.ptype == PKT_WRITE)         state <= S_WR;
          else if (rx_pkt.ptype == PKT_READ_REQ) state <= S_RD;
        end
        S_WR:   if (mem_gnt) state <= S_IDLE;
        S_RD:   if (mem_gnt) state <= S_WAIT;
        S_WAIT: if (mem_rvalid) begin
          rd_q  <= mem_rdata;
          state <= S_RESP;
        end
        S_RESP: if (tx_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
