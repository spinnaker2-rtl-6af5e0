// comms -- communication controller of a processing element.
//
// Sits between the PE's SRAM, its core and the NoC router.  It
//   * serves packets arriving from the NoC: WRITE and READ_RESP store their
//     128-bit payload in the SRAM; READ_REQ reads a word and answers with a
//     READ_RESP; MC (multicast event) goes into an event queue the core
//     drains through registers;
//   * raises the core's interrupt: event queue not empty, a WRITE carrying
//     the irq flag (a remote "flag update plus IRQ"), DMA done, MAC done;
//   * sends packets the core composes in its TX registers;
//   * holds the DMA engine and the MAC array, which share the 128-bit SRAM
//     port with the receive path (priority: receive, DMA, MAC).
// The paper places MAC array and DMA inside this block with a 128-bit path to
// the SRAM and a path to the NoC router, and describes event-driven cores and
// interrupt-carrying flag updates; the register map, the IRQ causes and the
// queue depth are this design's own.
//
// Register map (byte offsets, 32-bit registers):
//   00 IRQ_STATUS  [0] event queue non-empty, [1] remote IRQ write,
//                  [2] DMA done, [3] MAC done; write 1 to clear bits 1-3
//   04 IRQ_ENABLE  08 IRQ_ADDR  address of the last irq-flagged write
//   10 TX_DST  14 TX_ADDR  18..24 TX_PAYLOAD0..3
//   28 TX_CTRL     write {irq[2], type[1:0]} sends; read [0] = pending
//   30 RX_LEVEL  34 RX_KEY  38..44 RX_PAYLOAD0..3  48 RX_SRC  4C RX_POP (write)
//   50 DMA_LOCAL  54 DMA_RNODE  58 DMA_RADDR  5C DMA_LEN
//   60 DMA_CTRL    write {irq_last[2], dir[1], start[0]}; read [0] = busy
//   70 MAC_A  74 MAC_B  78 MAC_O  7C MAC_K
//   80 MAC_CTRL    write {mode16[1], start[0]}; read [0] = busy
// Register writes take effect on the cycle of reg_we; reads are
// combinational from reg_addr.
module comms
  import s2_pkg::*;
#(
  parameter logic [8:0]  NODE      = '0,
  parameter int unsigned EVQ_DEPTH = 8,
  parameter int unsigned MAC_ROWS  = 4,
  parameter int unsigned MAC_COLS  = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // NoC
  input  logic          rx_valid,
  output logic          rx_ready,
  input  noc_pkt_t      rx_pkt,
  output logic          tx_valid,
  input  logic          tx_ready,
  output noc_pkt_t      tx_pkt,
  // SRAM 128-bit port
  output logic          s_req,
  output logic          s_we,
  output logic [SRAM_AW-1:0] s_addr,
  output logic [DATA_W-1:0]  s_wdata,
  output logic [DATA_W/8-1:0] s_strb,
  input  logic          s_gnt,
  input  logic          s_rvalid,
  input  logic [DATA_W-1:0] s_rdata,
  // registers
  input  logic          reg_we,
  input  logic [7:0]    reg_addr,
  input  logic [31:0]   reg_wdata,
  output logic [31:0]   reg_rdata,
  // to the core and the DVFS control
  output logic          irq,
  output logic [$clog2(EVQ_DEPTH+1)-1:0] ev_level
);
  localparam int unsigned EVW = KEY_W + DATA_W + $bits(node_t);

  // ------------------------------------------------------------------
  // receive path
  typedef enum logic [2:0] {R_IDLE, R_MC, R_WR, R_RD, R_RDW, R_RESP} rstate_e;
  rstate_e  rstate;
  noc_pkt_t rp;          // packet being served
  noc_pkt_t resp;        // read response being sent
  logic     resp_done;

  assign rx_ready = (rstate == R_IDLE);

  // event queue
  logic           evq_wr_ready, evq_rd_valid, evq_pop;
  logic [EVW-1:0] evq_head;
  sync_fifo #(.WIDTH(EVW), .DEPTH(EVQ_DEPTH)) u_evq (
    .clk, .rst_n,
    .wr_valid (rstate == R_MC),
    .wr_ready (evq_wr_ready),
    .wr_data  ({rp.addr, rp.payload, rp.src}),
    .rd_valid (evq_rd_valid),
    .rd_ready (evq_pop),
    .rd_data  (evq_head),
    .level    (ev_level)
  );

  // ------------------------------------------------------------------
  // registers
  logic [3:0]  irq_en;
  logic [3:1]  irq_sticky;
  logic [31:0] irq_addr;
  node_t       tx_dst;
  logic [31:0] tx_addr;
  logic [31:0] tx_pay [4];
  logic [1:0]  tx_type;
  logic        tx_irq, tx_pend;
  logic [16:0] dma_local;
  node_t       dma_rnode;
  logic [31:0] dma_raddr;
  logic [15:0] dma_len;
  logic [16:0] mac_a, mac_b, mac_o;
  logic [15:0] mac_k;

  logic dma_busy, dma_done, mac_busy, mac_done;
  wire  dma_start = reg_we && reg_addr == 8'h60 && reg_wdata[0] && !dma_busy;
  wire  mac_start = reg_we && reg_addr == 8'h80 && reg_wdata[0] && !mac_busy;
  assign evq_pop  = reg_we && reg_addr == 8'h4C && evq_rd_valid;

  // ------------------------------------------------------------------
  // DMA and MAC array
  logic          dma_req, dma_gnt, dma_rvalid;
  logic [SRAM_AW-1:0] dma_addr;
  logic          dma_tx_valid, dma_tx_ready;
  noc_pkt_t      dma_tx_pkt;
  logic          mac_req, mac_we, mac_gnt, mac_rvalid;
  logic [SRAM_AW-1:0] mac_addr;
  logic [DATA_W-1:0]  mac_wdata;

  dma #(.NODE(NODE)) u_dma (
    .clk, .rst_n,
    .start (dma_start), .dir (reg_wdata[1]), .local_addr (dma_local),
    .rnode (dma_rnode), .raddr (dma_raddr), .len (dma_len), .irq_last (reg_wdata[2]),
    .busy (dma_busy), .done (dma_done),
    .m_req (dma_req), .m_addr (dma_addr), .m_gnt (dma_gnt), .m_rvalid (dma_rvalid), .m_rdata (s_rdata),
    .tx_valid (dma_tx_valid), .tx_ready (dma_tx_ready), .tx_pkt (dma_tx_pkt),
    .resp_done (resp_done)
  );

  mac_array #(.ROWS(MAC_ROWS), .COLS(MAC_COLS)) u_mac (
    .clk, .rst_n,
    .start (mac_start), .mode16 (reg_wdata[1]),
    .a_addr (mac_a), .b_addr (mac_b), .o_addr (mac_o), .k_len (mac_k),
    .busy (mac_busy), .done (mac_done),
    .m_req (mac_req), .m_we (mac_we), .m_addr (mac_addr), .m_wdata (mac_wdata),
    .m_gnt (mac_gnt), .m_rvalid (mac_rvalid), .m_rdata (s_rdata)
  );

  // ------------------------------------------------------------------
  // SRAM port sharing: receive path > DMA > MAC
  logic rx_sreq;
  assign rx_sreq = (rstate == R_WR) || (rstate == R_RD);

  always_comb begin
    s_req   = rx_sreq || dma_req || mac_req;
    s_we    = 1'b0;
    s_addr  = '0;
    s_wdata = '0;
    s_strb  = '1;
    if (rx_sreq) begin
      s_we    = (rstate == R_WR);
      s_addr  = rp.addr[4 +: SRAM_AW];
      s_wdata = rp.payload;
    end else if (dma_req) begin
      s_addr  = dma_addr;
    end else if (mac_req) begin
      s_we    = mac_we;
      s_addr  = mac_addr;
      s_wdata = mac_wdata;
    end
  end

  wire rx_gnt = s_gnt && rx_sreq;
  assign dma_gnt = s_gnt && !rx_sreq && dma_req;
  assign mac_gnt = s_gnt && !rx_sreq && !dma_req && mac_req;

  logic [2:0] own_q;   // {rx, dma, mac} granted last cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) own_q <= '0;
    else        own_q <= {rx_gnt, dma_gnt, mac_gnt};
  end
  wire rx_rvalid = s_rvalid && own_q[2];
  assign dma_rvalid = s_rvalid && own_q[1];
  assign mac_rvalid = s_rvalid && own_q[0];

  // ------------------------------------------------------------------
  // transmit arbitration: read response > core packet > DMA
  noc_pkt_t core_pkt;
  always_comb begin
    core_pkt         = '0;
    core_pkt.ptype   = pkt_type_e'(tx_type);
    core_pkt.dst     = tx_dst;
    core_pkt.src     = node_t'(NODE);
    core_pkt.irq     = tx_irq;
    core_pkt.addr    = tx_addr;
    core_pkt.payload = {tx_pay[3], tx_pay[2], tx_pay[1], tx_pay[0]};
  end

  wire resp_v = (rstate == R_RESP);
  assign tx_valid     = resp_v || tx_pend || dma_tx_valid;
  assign tx_pkt       = resp_v ? resp : (tx_pend ? core_pkt : dma_tx_pkt);
  assign dma_tx_ready = tx_ready && !resp_v && !tx_pend;
  wire   core_sent    = tx_ready && !resp_v && tx_pend;

  // ------------------------------------------------------------------
  // receive state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate    <= R_IDLE;
      rp        <= '0;
      resp      <= '0;
      resp_done <= 1'b0;
    end else begin
      resp_done <= 1'b0;
      case (rstate)
        R_IDLE: if (rx_valid) begin
          rp <= rx_pkt;
          case (rx_pkt.ptype)
            PKT_MC:       rstate <= R_MC;
            PKT_READ_REQ: rstate <= R_RD;
            default:      rstate <= R_WR;
          endcase
        end
        R_MC:  if (evq_wr_ready) rstate <= R_IDLE;
        R_WR:  if (rx_gnt) begin
          if (rp.ptype == PKT_READ_RESP) resp_done <= 1'b1;
          rstate <= R_IDLE;
        end
        R_RD:  if (rx_gnt) rstate <= R_RDW;
        R_RDW: if (rx_rvalid) begin
          resp.ptype   <= PKT_READ_RESP;
          resp.dst     <= rp.src;
          resp.src     <= node_t'(NODE);
          resp.irq     <= 1'b0;
          resp.addr    <= rp.payload[31:0];
          resp.payload <= s_rdata;
          rstate       <= R_RESP;
        end
        R_RESP: if (tx_ready) rstate <= R_IDLE;
        default: rstate <= R_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // register writes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irq_en     <= '0;
      irq_sticky <= '0;
      irq_addr   <= '0;
      tx_dst     <= '0;
      tx_addr    <= '0;
      tx_pay     <= '{default: '0};
      tx_type    <= '0;
      tx_irq     <= 1'b0;
      tx_pend    <= 1'b0;
      dma_local  <= '0;
      dma_rnode  <= '0;
      dma_raddr  <= '0;
      dma_len    <= '0;
      mac_a      <= '0;
      mac_b      <= '0;
      mac_o      <= '0;
      mac_k      <= '0;
    end else begin
      if (core_sent) tx_pend <= 1'b0;
      if (reg_we) begin
        case (reg_addr)
          8'h00: irq_sticky <= irq_sticky & ~reg_wdata[3:1];
          8'h04: irq_en     <= reg_wdata[3:0];
          8'h10: tx_dst     <= node_t'(reg_wdata[8:0]);
          8'h14: tx_addr    <= reg_wdata;
          8'h18: tx_pay[0]  <= reg_wdata;
          8'h1C: tx_pay[1]  <= reg_wdata;
          8'h20: tx_pay[2]  <= reg_wdata;
          8'h24: tx_pay[3]  <= reg_wdata;
          8'h28: if (!tx_pend) begin
            tx_type <= reg_wdata[1:0];
            tx_irq  <= reg_wdata[2];
            tx_pend <= 1'b1;
          end
          8'h50: dma_local  <= reg_wdata[16:0];
          8'h54: dma_rnode  <= node_t'(reg_wdata[8:0]);
          8'h58: dma_raddr  <= reg_wdata;
          8'h5C: dma_len    <= reg_wdata[15:0];
          8'h70: mac_a      <= reg_wdata[16:0];
          8'h74: mac_b      <= reg_wdata[16:0];
          8'h78: mac_o      <= reg_wdata[16:0];
          8'h7C: mac_k      <= reg_wdata[15:0];
          default: ;
        endcase
      end
      // events set after software clears, so a coinciding event is kept
      if (rstate == R_WR && rx_gnt && rp.irq && rp.ptype == PKT_WRITE) begin
        irq_sticky[1] <= 1'b1;
        irq_addr      <= rp.addr;
      end
      if (dma_done) irq_sticky[2] <= 1'b1;
      if (mac_done) irq_sticky[3] <= 1'b1;
    end
  end

  logic [3:0] irq_status;
  assign irq_status = {irq_sticky, evq_rd_valid};
  assign irq = |(irq_status & irq_en);

  // ------------------------------------------------------------------
  // register reads
  logic [31:0]       ev_key;
  logic [DATA_W-1:0] ev_pay;
  node_t             ev_src;
  assign {ev_key, ev_pay, ev_src} = evq_head;

  always_comb begin
    case (reg_addr)
      8'h00: reg_rdata = 32'(irq_status);
      8'h04: reg_rdata = 32'(irq_en);
      8'h08: reg_rdata = irq_addr;
      8'h10: reg_rdata = 32'(tx_dst);
      8'h14: reg_rdata = tx_addr;
      8'h28: reg_rdata = 32'(tx_pend);
      8'h30: reg_rdata = 32'(ev_level);
      8'h34: reg_rdata = evq_rd_valid ? ev_key : '0;
      8'h38: reg_rdata = ev_pay[31:0];
      8'h3C: reg_rdata = ev_pay[63:32];
      8'h40: reg_rdata = ev_pay[95:64];
      8'h44: reg_rdata = ev_pay[127:96];
      8'h48: reg_rdata = 32'(ev_src);
      8'h50: reg_rdata = 32'(dma_local);
      8'h54: reg_rdata = 32'(dma_rnode);
      8'h58: reg_rdata = dma_raddr;
      8'h5C: reg_rdata = 32'(dma_len);
      8'h60: reg_rdata = 32'(dma_busy);
      8'h70: reg_rdata = 32'(mac_a);
      8'h74: reg_rdata = 32'(mac_b);
      8'h78: reg_rdata = 32'(mac_o);
      8'h7C: reg_rdata = 32'(mac_k);
      8'h80: reg_rdata = 32'(mac_busy);
      default: reg_rdata = '0;
    endcase
  end

  // the SRAM's wide port never waits, so a request is granted at once
  always_ff @(posedge clk) begin
    if (rst_n) assert (!s_req || s_gnt);
  end
endmodule
