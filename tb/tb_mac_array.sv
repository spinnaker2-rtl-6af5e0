// tb_mac_array -- runs random matrix products through the MAC array in 8-bit
// and 16-bit mode and compares C with products computed here.  The memory
// model grants requests at random (to exercise stalls) except in one run
// where it always grants, in which start-to-done must take
// 2 + 5*K (8-bit) or 2 + 7*K (16-bit) plus ROWS*COLS/4 write cycles.
module tb_mac_array;
  import s2_pkg::*;
  localparam int ROWS = 4, COLS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, mode16 = 0, busy, done;
  logic [16:0] a_addr = 0, b_addr = 0, o_addr = 0;
  logic [15:0] k_len = 0;
  logic m_req, m_we, m_gnt, m_rvalid = 0;
  logic [SRAM_AW-1:0] m_addr;
  logic [127:0] m_wdata, m_rdata = 0;

  mac_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  // memory model
  logic [127:0] mem [int];
  bit stall_en = 1;
  logic gnt_rand;
  always_ff @(posedge clk) gnt_rand <= stall_en ? 1'($urandom_range(0, 2) != 0) : 1'b1;
  assign m_gnt = m_req && gnt_rand;
  always @(posedge clk) begin
    m_rvalid <= m_gnt && !m_we;
    if (m_gnt && m_we) mem[int'(m_addr)] = m_wdata;
    if (m_gnt && !m_we) m_rdata <= mem.exists(int'(m_addr)) ? mem[int'(m_addr)] : 128'd0;
  end

  int A [ROWS][64];
  int B [64][COLS];

  task automatic job(input bit m16, input int K, input bit stalls);
    int cyc, exp_cyc;
    logic [127:0] w;
    stall_en = stalls;
    for (int k = 0; k < K; k++) begin
      w = '0;
      for (int r = 0; r < ROWS; r++) begin
        A[r][k] = m16 ? $urandom_range(0, 65535) - 32768 : $urandom_range(0, 255) - 128;
        if (m16) w[16*r +: 16] = 16'(A[r][k]); else w[8*r +: 8] = 8'(A[r][k]);
      end
      mem[16 + k] = w;                      // A at byte 0x100
      for (int c = 0; c < COLS; c++)
        B[k][c] = m16 ? $urandom_range(0, 65535) - 32768 : $urandom_range(0, 255) - 128;
      if (m16) begin
        for (int h = 0; h < 2; h++) begin
          w = '0;
          for (int c = 0; c < 8; c++) w[16*c +: 16] = 16'(B[k][8*h + c]);
          mem[512 + 2*k + h] = w;           // B at byte 0x2000
        end
      end else begin
        w = '0;
        for (int c = 0; c < COLS; c++) w[8*c +: 8] = 8'(B[k][c]);
        mem[512 + k] = w;
      end
    end
    @(negedge clk);
    a_addr = 17'h100; b_addr = 17'h2000; o_addr = 17'h8000; k_len = 16'(K); mode16 = m16; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    exp_cyc = 2 + (m16 ? 7 : 5) * K + ROWS * COLS / 4;
    if (!stalls) begin
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("FAIL: %0d cycles, expected %0d", cyc, exp_cyc); end
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int e = 0;
        logic [127:0] ow;
        for (int k = 0; k < K; k++) e += A[r][k] * B[k][c];
        ow = mem[(17'h8000 >> 4) + r * COLS / 4 + c / 4];
        checks++;
        if (ow[32 * (c % 4) +: 32] != 32'(e)) begin
          failures++;
          $display("FAIL: m16=%0d K=%0d C[%0d][%0d]=%0d exp %0d", m16, K, r, c, $signed(ow[32*(c%4) +: 32]), e);
        end
      end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    job(0, 8, 0);
    job(1, 8, 0);
    job(0, 1, 1);
    job(0, 37, 1);
    job(1, 64, 1);
    job(0, 64, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
