// mac_array -- integer matrix-multiply engine of a PE.
//
// Computes the ROWS x COLS product C = A * B with an inner dimension of K,
// for signed 8-bit or 16-bit operands, and stores C as 32-bit words in the
// PE's SRAM.  The paper gives the function (8/16-bit integer matrix
// multiplication in every core, placed in the communication block with a
// 128-bit path to the SRAM); the array size, the dataflow and the memory
// layout are this design's own.
//
// Dataflow: output stationary.  ROWS x COLS multiply-accumulate cells each
// hold one 32-bit accumulator (wrapping).  For every k the controller reads
// one 128-bit word holding column k of A (ROWS elements, low bytes first) and
// one (8-bit mode) or two (16-bit mode) words holding row k of B (COLS
// elements), then all cells perform acc[r][c] += A[r][k] * B[k][c] in one
// cycle.  Afterwards row r of C is written as COLS/4 words from
// o_addr + r*COLS*4.  Matrices of other shapes are tiled by software; a 2D
// convolution runs as a product of an im2col-arranged operand.
//
// Memory layout (byte addresses, 16-byte aligned):
//   A column k : a_addr + 16*k
//   B row k    : b_addr + 16*k (8-bit) or b_addr + 32*k (16-bit)
//   C row r    : o_addr + 4*COLS*r
// Timing with no SRAM contention, from start to done: 2 + 5*K (8-bit) or
// 2 + 7*K (16-bit)
// cycles of set-up, operand reads and MACs, plus ROWS*COLS/4 write cycles.
// Constraints: COLS a multiple of 16, ROWS <= 8.
module mac_array
  import s2_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // job
  input  logic          start,
  input  logic          mode16,
  input  logic [16:0]   a_addr,
  input  logic [16:0]   b_addr,
  input  logic [16:0]   o_addr,
  input  logic [15:0]   k_len,
  output logic          busy,
  output logic          done,
  // local SRAM, 128-bit
  output logic          m_req,
  output logic          m_we,
  output logic [SRAM_AW-1:0] m_addr,
  output logic [DATA_W-1:0]  m_wdata,
  input  logic          m_gnt,
  input  logic          m_rvalid,
  input  logic [DATA_W-1:0] m_rdata
);
  localparam int unsigned BW8   = COLS * 8 / DATA_W;    // B words per k, 8-bit
  localparam int unsigned BW16  = COLS * 16 / DATA_W;   // B words per k, 16-bit
  localparam int unsigned OWPR  = COLS * 32 / DATA_W;   // output words per row
  localparam int unsigned OW    = ROWS * OWPR;          // output words

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_RA, S_WA, S_RB, S_WB, S_MAC, S_WR} state_e;
  state_e state;

  logic               m16;
  logic [SRAM_AW-1:0] a_w, b_w, o_w;
  logic [15:0]        kk, n_k;
  logic [3:0]         bi;           // B word index within a k step
  logic [15:0]        wi;           // output word index
  logic [DATA_W-1:0]  a_buf;
  logic [COLS*16-1:0] b_buf;
  logic signed [31:0] acc [ROWS][COLS];

  logic [3:0] nbw;
  assign nbw = m16 ? 4'(BW16) : 4'(BW8);

  assign busy = (state != S_IDLE);

  // operand selection and products
  logic signed [16:0] opa [ROWS];
  logic signed [16:0] opb [COLS];
  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++)
      opa[r] = m16 ? 17'($signed(a_buf[16*r +: 16])) : 17'($signed(a_buf[8*r +: 8]));
    for (int unsigned c = 0; c < COLS; c++)
      opb[c] = m16 ? 17'($signed(b_buf[16*c +: 16])) : 17'($signed(b_buf[8*c +: 8]));
  end

  // SRAM requests
  always_comb begin
    m_req   = 1'b0;
    m_we    = 1'b0;
    m_addr  = '0;
    m_wdata = '0;
    case (state)
      S_RA: begin
        m_req  = 1'b1;
        m_addr = a_w + SRAM_AW'(kk);
      end
      S_RB: begin
        m_req  = 1'b1;
        m_addr = b_w + SRAM_AW'(32'(kk) * 32'(nbw)) + SRAM_AW'(bi);
      end
      S_WR: begin
        m_req  = 1'b1;
        m_we   = 1'b1;
        m_addr = o_w + SRAM_AW'(wi);
        for (int unsigned r = 0; r < ROWS; r++)
          for (int unsigned j = 0; j < OWPR; j++)
            if (32'(wi) == r * OWPR + j)
              for (int unsigned e = 0; e < 4; e++)
                m_wdata[32*e +: 32] = acc[r][4*j + e];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      m16   <= 1'b0;
      a_w   <= '0;
      b_w   <= '0;
      o_w   <= '0;
      kk    <= '0;
      n_k   <= '0;
      bi    <= '0;
      wi    <= '0;
      a_buf <= '0;
      b_buf <= '0;
      done  <= 1'b0;
      for (int unsigned r = 0; r < ROWS; r++)
        for (int unsigned c = 0; c < COLS; c++)
          acc[r][c] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          m16   <= mode16;
          a_w   <= a_addr[16:4];
          b_w   <= b_addr[16:4];
          o_w   <= o_addr[16:4];
          n_k   <= k_len;
          kk    <= '0;
          state <= S_CLR;
        end
        S_CLR: begin
          for (int unsigned r = 0; r < ROWS; r++)
            for (int unsigned c = 0; c < COLS; c++)
              acc[r][c] <= '0;
          b_buf <= '0;
          wi    <= '0;
          state <= (n_k == '0) ? S_WR : S_RA;
        end
        S_RA: if (m_gnt) state <= S_WA;
        S_WA: if (m_rvalid) begin
          a_buf <= m_rdata;
          bi    <= '0;
          state <= S_RB;
        end
        S_RB: if (m_gnt) state <= S_WB;
        S_WB: if (m_rvalid) begin
          b_buf[32'(bi) * DATA_W +: DATA_W] <= m_rdata;
          if (bi == nbw - 1'b1) state <= S_MAC;
          else begin
            bi    <= bi + 1'b1;
            state <= S_RB;
          end
        end
        S_MAC: begin
          for (int unsigned r = 0; r < ROWS; r++)
            for (int unsigned c = 0; c < COLS; c++)
              acc[r][c] <= acc[r][c] + 32'(opa[r] * opb[c]);
          kk    <= kk + 1'b1;
          state <= (kk + 1'b1 == n_k) ? S_WR : S_RA;
        end
        S_WR: if (m_gnt) begin
          if (wi == 16'(OW - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            wi <= wi + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
