// dma -- block-transfer engine of a PE.
//
// Moves `len` consecutive 128-bit words between the PE's own SRAM and another
// NoC node (the SRAM of another PE, or DRAM behind a DRAM bridge) while the
// core keeps running.  The paper states that every core has a DMA unit and
// that the scheduling scheme fetches partial results from another worker's
// SRAM; the transfer protocol below is this design's own.
//
//   dir = 0 (write out): read local word, send a WRITE packet to
//            rnode:raddr + 16*i; the last packet carries irq = irq_last so
//            the receiver can be interrupted when the block has landed.
//   dir = 1 (fetch):     send READ_REQ packets to rnode:raddr + 16*i with the
//            local return address in payload[31:0]; the responses are
//            written to SRAM by the receive path of `comms`, which pulses
//            resp_done once per word.  The job ends when all have arrived.
//
// Addresses are byte addresses, 16-byte aligned.  `start` is taken only when
// idle; `done` pulses for one cycle at the end of a job.  Write-out needs
// 3 cycles per word without back-pressure; fetch issues one request per cycle.
module dma
  import s2_pkg::*;
#(
  parameter logic [8:0] NODE = '0
) (
  input  logic          clk,
  input  logic          rst_n,
  // job
  input  logic          start,
  input  logic          dir,
  input  logic [16:0]   local_addr,
  input  node_t         rnode,
  input  logic [31:0]   raddr,
  input  logic [15:0]   len,
  input  logic          irq_last,
  output logic          busy,
  output logic          done,
  // local SRAM (128-bit, read only)
  output logic          m_req,
  output logic [SRAM_AW-1:0] m_addr,
  input  logic          m_gnt,
  input  logic          m_rvalid,
  input  logic [DATA_W-1:0] m_rdata,
  // packets to the NoC
  output logic          tx_valid,
  input  logic          tx_ready,
  output noc_pkt_t      tx_pkt,
  // one fetched word has been written locally
  input  logic          resp_done
);
  typedef enum logic [2:0] {S_IDLE, S_RD, S_WAIT, S_SEND, S_REQ, S_RESP} state_e;
  state_e state;

  logic [16:0]  l_addr;
  node_t        r_node;
  logic [31:0]  r_addr;
  logic [15:0]  n_words, i, n_resp;
  logic         irq_l;
  logic [DATA_W-1:0] buf_q;

  assign busy   = (state != S_IDLE);
  assign m_req  = (state == S_RD);
  assign m_addr = SRAM_AW'((l_addr >> 4) + 17'(i));

  always_comb begin
    tx_pkt         = '0;
    tx_pkt.dst     = r_node;
    tx_pkt.src     = node_t'(NODE);
    tx_pkt.addr    = r_addr + {i, 4'b0000};
    tx_valid       = 1'b0;
    if (state == S_SEND) begin
      tx_valid       = 1'b1;
      tx_pkt.ptype   = PKT_WRITE;
      tx_pkt.payload = buf_q;
      tx_pkt.irq     = irq_l && (i == n_words - 1'b1);
    end else if (state == S_REQ) begin
      tx_valid       = 1'b1;
      tx_pkt.ptype   = PKT_READ_REQ;
      tx_pkt.payload = DATA_W'(32'(l_addr) + 32'({i, 4'b0000}));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      l_addr  <= '0;
      r_node  <= '0;
      r_addr  <= '0;
      n_words <= '0;
      i       <= '0;
      n_resp  <= '0;
      irq_l   <= 1'b0;
      buf_q   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (resp_done && state != S_IDLE) n_resp <= n_resp + 1'b1;
      case (state)
        S_IDLE: if (start) begin
          l_addr  <= local_addr;
          r_node  <= rnode;
          r_addr  <= raddr;
          n_words <= len;
          irq_l   <= irq_last;
          i       <= '0;
          n_resp  <= '0;
          if (len == '0)  done  <= 1'b1;
          else if (dir)   state <= S_REQ;
          else            state <= S_RD;
        end
        S_RD:   if (m_gnt) state <= S_WAIT;
        S_WAIT: if (m_rvalid) begin
          buf_q <= m_rdata;
          state <= S_SEND;
        end
        S_SEND: if (tx_ready) begin
          if (i == n_words - 1'b1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            i     <= i + 1'b1;
            state <= S_RD;
          end
        end
        S_REQ:  if (tx_ready) begin
          if (i == n_words - 1'b1) state <= S_RESP;
          else i <= i + 1'b1;
        end
        S_RESP: if (n_resp + 16'(resp_done) == n_words) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
