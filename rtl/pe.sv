// pe -- one SpiNNaker2 processing element, without its processor core.
//
// A PE is an ARM Cortex-M4F with 128 kB of local SRAM, a communication block
// (DMA, MAC array, NoC interface) and accelerators for exp, log and random
// numbers.  The core is licensed IP and not part of this RTL: its 32-bit
// instruction and data buses, its interrupt line and its clock enable are
// ports.  The block structure (core, accelerators, comms with MAC array and
// DMA, SRAM reached by 32-bit instruction, 32-bit data and 128-bit comms
// paths, a link to the NoC router) follows the paper; the address map is
// this design's own:
//   0x0000_0000 - 0x0001_FFFF  SRAM (instruction and data bus)
//   0xE000_0000 + 0x00..0x8C   comms registers (see comms.sv)
//   0xE000_0000 + 0x90  EXP    write operand (s16.15), read exp result
//                 0x94  LOG    write operand (u16.15), read ln result
//                 0x98  PRNG   write seed, read value (a read advances it)
//                 0x9C  TRNG   read latest word of the true random source
// The true random source is a physical noise source and enters through the
// trng_valid / trng_value ports; the PE keeps its latest word.
//                 0xA0  DVFS   write {auto, pl[1:0]}, read {auto, pl}
// Bus timing: request held until gnt; read data with rvalid one cycle after
// gnt.  Register accesses are granted at once, SRAM accesses when the SRAM
// arbiter allows (the comms port has priority).  The exp and log results can
// be read from the cycle after the operand write.
module pe
  import s2_pkg::*;
#(
  parameter logic [8:0]  NODE     = '0,
  parameter int unsigned MAC_ROWS = 4,
  parameter int unsigned MAC_COLS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // core instruction bus
  input  logic        i_req,
  input  logic [31:0] i_addr,
  output logic        i_gnt,
  output logic        i_rvalid,
  output logic [31:0] i_rdata,
  // core data bus
  input  core_req_t   d_req,
  output core_rsp_t   d_rsp,
  // to the core
  output logic        irq,
  output logic        core_clk_en,
  output logic [1:0]  pl,
  // true random source (physical noise source, outside the logic)
  input  logic        trng_valid,
  input  logic [31:0] trng_value,
  // NoC router
  input  logic        rx_valid,
  output logic        rx_ready,
  input  noc_pkt_t    rx_pkt,
  output logic        tx_valid,
  input  logic        tx_ready,
  output noc_pkt_t    tx_pkt
);
  wire periph = (d_req.addr[31:28] == 4'hE);
  wire reg_acc = d_req.req && periph;

  // SRAM
  logic          w_req, w_we, w_gnt, w_rvalid;
  logic [SRAM_AW-1:0] w_addr;
  logic [DATA_W-1:0]  w_wdata, w_rdata;
  logic [DATA_W/8-1:0] w_strb;
  logic          sd_gnt, sd_rvalid;
  logic [31:0]   sd_rdata;

  pe_sram u_sram (
    .clk, .rst_n,
    .w_req, .w_we, .w_addr, .w_wdata, .w_strb, .w_gnt, .w_rvalid, .w_rdata,
    .d_req (d_req.req && !periph), .d_we (d_req.we), .d_addr (d_req.addr[16:0]),
    .d_wdata (d_req.wdata), .d_be (d_req.be),
    .d_gnt (sd_gnt), .d_rvalid (sd_rvalid), .d_rdata (sd_rdata),
    .i_req, .i_addr (i_addr[16:0]), .i_gnt, .i_rvalid, .i_rdata
  );

  // comms
  logic [31:0] c_rdata;
  logic [3:0]  ev_level;
  wire  c_sel = (d_req.addr[7:0] < 8'h90);

  comms #(.NODE(NODE), .EVQ_DEPTH(8), .MAC_ROWS(MAC_ROWS), .MAC_COLS(MAC_COLS)) u_comms (
    .clk, .rst_n,
    .rx_valid, .rx_ready, .rx_pkt, .tx_valid, .tx_ready, .tx_pkt,
    .s_req (w_req), .s_we (w_we), .s_addr (w_addr), .s_wdata (w_wdata), .s_strb (w_strb),
    .s_gnt (w_gnt), .s_rvalid (w_rvalid), .s_rdata (w_rdata),
    .reg_we (reg_acc && d_req.we && c_sel), .reg_addr (d_req.addr[7:0]),
    .reg_wdata (d_req.wdata), .reg_rdata (c_rdata),
    .irq, .ev_level
  );

  // accelerators
  wire wr_exp  = reg_acc && d_req.we  && d_req.addr[7:0] == 8'h90;
  wire wr_log  = reg_acc && d_req.we  && d_req.addr[7:0] == 8'h94;
  wire wr_rng  = reg_acc && d_req.we  && d_req.addr[7:0] == 8'h98;
  wire rd_rng  = reg_acc && !d_req.we && d_req.addr[7:0] == 8'h98;
  wire wr_dvfs = reg_acc && d_req.we  && d_req.addr[7:0] == 8'hA0;

  logic        exp_v, log_v;
  logic [31:0] exp_y, log_y, rng_val, trng_val;
  logic        auto_mode;

  exp_accel u_exp (.clk, .rst_n, .in_valid (wr_exp), .x (d_req.wdata), .out_valid (exp_v), .y (exp_y));
  log_accel u_log (.clk, .rst_n, .in_valid (wr_log), .x (d_req.wdata), .out_valid (log_v), .y (log_y));
  prng u_prng (.clk, .rst_n, .seed_we (wr_rng), .seed (d_req.wdata), .next (rd_rng), .value (rng_val));
  // latest word of the true random source
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          trng_val <= '0;
    else if (trng_valid) trng_val <= trng_value;
  end

  dvfs_ctrl #(.LOAD_W(4)) u_dvfs (
    .clk, .rst_n, .pl_we (wr_dvfs), .pl_wdata (d_req.wdata[2:0]), .load (ev_level),
    .pl, .auto_mode, .clk_en (core_clk_en)
  );

  // register read data, returned one cycle after the grant
  logic [31:0] reg_rdata_c, reg_rdata_q;
  logic        reg_rvalid_q;
  always_comb begin
    case (d_req.addr[7:0])
      8'h90:   reg_rdata_c = exp_y;
      8'h94:   reg_rdata_c = log_y;
      8'h98:   reg_rdata_c = rng_val;
      8'h9C:   reg_rdata_c = trng_val;
      8'hA0:   reg_rdata_c = {29'd0, auto_mode, pl};
      default: reg_rdata_c = c_sel ? c_rdata : '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_rvalid_q <= 1'b0;
      reg_rdata_q  <= '0;
    end else begin
      reg_rvalid_q <= reg_acc;
      reg_rdata_q  <= reg_rdata_c;
    end
  end

  assign d_rsp.gnt    = periph ? d_req.req : sd_gnt;
  assign d_rsp.rvalid = reg_rvalid_q || sd_rvalid;
  assign d_rsp.rdata  = reg_rvalid_q ? reg_rdata_q : sd_rdata;
endmodule
