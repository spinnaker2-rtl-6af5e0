// pe_sram -- the 128 kB local memory of one processing element.
//
// The PE's SRAM is reached three ways: the core's 32-bit instruction port,
// the core's 32-bit data port, and the 128-bit port of the communication
// controller (DMA, MAC array, remote accesses).  Those three paths and their
// widths are the paper's; how they share the storage is not given.  Here the
// storage is one array of 8192 x 128-bit words with byte write enables, and a
// fixed-priority arbiter grants one access per cycle: wide port first, then
// data, then instruction.
//
// Every port uses the same handshake: hold req until gnt; for a read the data
// arrives with rvalid exactly one cycle after gnt.  Narrow addresses are byte
// addresses (bits [16:2] select the 32-bit word); the wide address is a word
// index.
module pe_sram #(
  parameter int unsigned BYTES    = s2_pkg::SRAM_BYTES,
  parameter int unsigned WIDE_W   = 128,
  parameter int unsigned NARROW_W = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // 128-bit port (comms)
  input  logic                 w_req,
  input  logic                 w_we,
  input  logic [$clog2(BYTES/(WIDE_W/8))-1:0] w_addr,
  input  logic [WIDE_W-1:0]    w_wdata,
  input  logic [WIDE_W/8-1:0]  w_strb,
  output logic                 w_gnt,
  output logic                 w_rvalid,
  output logic [WIDE_W-1:0]    w_rdata,
  // 32-bit data port (core)
  input  logic                 d_req,
  input  logic                 d_we,
  input  logic [$clog2(BYTES)-1:0] d_addr,
  input  logic [NARROW_W-1:0]  d_wdata,
  input  logic [NARROW_W/8-1:0] d_be,
  output logic                 d_gnt,
  output logic                 d_rvalid,
  output logic [NARROW_W-1:0]  d_rdata,
  // 32-bit instruction port (core, read only)
  input  logic                 i_req,
  input  logic [$clog2(BYTES)-1:0] i_addr,
  output logic                 i_gnt,
  output logic                 i_rvalid,
  output logic [NARROW_W-1:0]  i_rdata
);
  localparam int unsigned WB    = WIDE_W / 8;          // bytes per word
  localparam int unsigned WORDS = BYTES / WB;
  localparam int unsigned AW    = $clog2(WORDS);
  localparam int unsigned LANES = WIDE_W / NARROW_W;   // narrow words per word
  localparam int unsigned LW    = $clog2(LANES);
  localparam int unsigned NB    = NARROW_W / 8;

  logic [WIDE_W-1:0] mem [WORDS];

  // arbitration
  assign w_gnt = w_req;
  assign d_gnt = d_req && !w_req;
  assign i_gnt = i_req && !w_req && !d_req;

  logic          acc_we;
  logic [AW-1:0] acc_addr;
  logic [WIDE_W-1:0] acc_wdata;
  logic [WB-1:0] acc_strb;

  always_comb begin
    acc_we    = 1'b0;
    acc_addr  = '0;
    acc_wdata = '0;
    acc_strb  = '0;
    if (w_req) begin
      acc_we    = w_we;
      acc_addr  = w_addr;
      acc_wdata = w_wdata;
      acc_strb  = w_strb;
    end else if (d_req) begin
      acc_we    = d_we;
      acc_addr  = d_addr[$clog2(BYTES)-1 -: AW];
      acc_wdata = {LANES{d_wdata}};
      for (int unsigned l = 0; l < LANES; l++)
        if (d_addr[$clog2(NB) +: LW] == LW'(l)) acc_strb[l*NB +: NB] = d_be;
    end else if (i_req) begin
      acc_addr  = i_addr[$clog2(BYTES)-1 -: AW];
    end
  end

  logic [WIDE_W-1:0] rdata_q;
  always_ff @(posedge clk) begin
    if (w_req || d_req || i_req) begin
      if (acc_we) begin
        for (int unsigned b = 0; b < WB; b++)
          if (acc_strb[b]) mem[acc_addr][b*8 +: 8] <= acc_wdata[b*8 +: 8];
      end else begin
        rdata_q <= mem[acc_addr];
      end
    end
  end

  // which port owns the data returned this cycle, and its narrow lane
  logic [2:0]    own_q;   // {wide, data, instr}
  logic [LW-1:0] lane_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_q  <= '0;
      lane_q <= '0;
    end else begin
      own_q  <= {w_gnt, d_gnt, i_gnt};
      lane_q <= d_gnt ? d_addr[$clog2(NB) +: LW] : i_addr[$clog2(NB) +: LW];
    end
  end

  assign w_rvalid = own_q[2];
  assign d_rvalid = own_q[1];
  assign i_rvalid = own_q[0];
  assign w_rdata  = rdata_q;
  assign d_rdata  = rdata_q[lane_q*NARROW_W +: NARROW_W];
  assign i_rdata  = rdata_q[lane_q*NARROW_W +: NARROW_W];

  // at most one port is granted per cycle
  always_ff @(posedge clk) begin
    if (rst_n) assert (32'(w_gnt) + 32'(d_gnt) + 32'(i_gnt) <= 1);
  end
endmodule
