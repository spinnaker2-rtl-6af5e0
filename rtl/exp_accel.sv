// exp_accel -- exponential function accelerator of a PE.
//
// Computes y = exp(x) for a signed fixed-point operand.  The paper lists an
// exponential accelerator per core; its number format and method are not
// given.  This design uses s16.15 for input and output (16 integer bits,
// 15 fraction bits, two's complement) and evaluates
//     exp(x) = 2^(x*log2 e) = 2^n * 2^f,   n integer, 0 <= f < 1,
// where 2^f comes from a 33-entry table T[i] = round(2^(i/32) * 2^30) with
// linear interpolation on the 10 fraction bits below the table index.  The
// 2^n scaling is a shift; results above the s16.15 range saturate to
// 0x7FFF_FFFF and results below one LSB truncate to 0.  Worst-case relative
// error is about 1.2e-4 plus one LSB of truncation.
//
// Timing: one operand per cycle (in_valid); the result appears with
// out_valid on the next cycle.
module exp_accel #(
  parameter int unsigned LUT_BITS = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] x,          // s16.15
  output logic        out_valid,
  output logic [31:0] y           // s16.15, >= 0
);
  localparam int unsigned N = 1 << LUT_BITS;
  localparam int unsigned FB = 15 - LUT_BITS;   // interpolation bits
  localparam logic signed [63:0] LOG2E_Q30 = 64'sd1549082005;

  // T[i] = round(2^(i/32) * 2^30), i = 0..32
  localparam logic [31:0] T [33] = '{
    32'd1073741824, 32'd1097253708, 32'd1121280436, 32'd1145833280, 32'd1170923762,
    32'd1196563654, 32'd1222764986, 32'd1249540052, 32'd1276901417, 32'd1304861917,
    32'd1333434672, 32'd1362633090, 32'd1392470869, 32'd1422962010, 32'd1454120821,
    32'd1485961921, 32'd1518500250, 32'd1551751076, 32'd1585730000, 32'd1620452965,
    32'd1655936265, 32'd1692196547, 32'd1729250827, 32'd1767116489, 32'd1805811301,
    32'd1845353420, 32'd1885761398, 32'd1927054196, 32'd1969251188, 32'd2012372174,
    32'd2056437387, 32'd2101467502, 32'd2147483648};

  logic signed [63:0] t;        // x*log2(e) in s.15
  logic signed [63:0] n;        // integer part
  logic [14:0]        f;        // fraction
  logic [LUT_BITS-1:0] idx;
  logic [FB-1:0]      fr;
  logic [63:0]        m;        // 2^f in Q30
  logic [63:0]        r;
  logic [31:0]        y_c;

  always_comb begin
    t   = ($signed({{32{x[31]}}, x}) * LOG2E_Q30) >>> 30;
    n   = t >>> 15;
    f   = t[14:0];
    idx = f[14 -: LUT_BITS];
    fr  = f[FB-1:0];
    m   = 64'(T[{1'b0, idx}]) + (((64'(T[{1'b0, idx} + 6'd1]) - 64'(T[{1'b0, idx}])) * 64'(fr)) >> FB);
    r   = '0;
    if (n >= 16) begin
      y_c = 32'h7FFF_FFFF;
    end else begin
      if (n >= 15) r = m << (n - 15);
      else if (n > -40) r = m >> (15 - n);
      else r = '0;
      y_c = (r > 64'h7FFF_FFFF) ? 32'h7FFF_FFFF : r[31:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= y_c;
    end
  end
endmodule
