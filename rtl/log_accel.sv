// log_accel -- natural logarithm accelerator of a PE.
//
// Computes y = ln(x) for an unsigned u16.15 operand and returns s16.15.  The
// paper lists a logarithm accelerator per core without its method; this one
// normalises the operand with a leading-one detector,
//     log2(x) = (p - 15) + log2(1.m),   p = position of the leading one,
// looks log2(1.m) up in a 33-entry table L[i] = round(log2(1 + i/32) * 2^30)
// with linear interpolation on the next 10 mantissa bits, and multiplies by
// ln 2.  Absolute error is below 2e-4 (about 6 LSB).  x = 0 returns the most
// negative value 0x8000_0000.
//
// Timing: one operand per cycle; result with out_valid on the next cycle.
module log_accel #(
  parameter int unsigned LUT_BITS = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] x,          // u16.15
  output logic        out_valid,
  output logic [31:0] y           // s16.15
);
  localparam int unsigned FB = 31 - LUT_BITS - 16;  // 10 interpolation bits
  localparam logic signed [63:0] LN2_Q30 = 64'sd744261118;

  // L[i] = round(log2(1 + i/32) * 2^30), i = 0..32
  localparam logic [31:0] L [33] = '{
    32'd0,         32'd47667823,  32'd93912511,  32'd138816582, 32'd182455581,
    32'd224898839, 32'd266210141, 32'd306448299, 32'd345667660, 32'd383918542,
    32'd421247625, 32'd457698295, 32'd493310944, 32'd528123241, 32'd562170370,
    32'd595485245, 32'd628098702, 32'd660039669, 32'd691335320, 32'd722011213,
    32'd752091421, 32'd781598637, 32'd810554283, 32'd838978604, 32'd866890747,
    32'd894308843, 32'd921250079, 32'd947730758, 32'd973766362, 32'd999371606,
    32'd1024560487, 32'd1049346328, 32'd1073741824};

  logic [4:0]          p;
  logic [31:0]         mn;
  logic [LUT_BITS-1:0] idx;
  logic [FB-1:0]       fr;
  logic signed [63:0]  lg;     // log2(x) in Q30
  logic signed [63:0]  ln;     // ln(x) in Q15
  logic [31:0]         y_c;

  always_comb begin
    p = '0;
    for (int unsigned b = 0; b < 32; b++)
      if (x[b]) p = 5'(b);
    mn  = x << (5'd31 - p);                 // leading one at bit 31
    idx = mn[30 -: LUT_BITS];
    fr  = mn[30-LUT_BITS -: FB];
    lg  = ((64'(p) - 64'sd15) <<< 30)
        + 64'(L[{1'b0, idx}])
        + 64'(((64'(L[{1'b0, idx} + 6'd1]) - 64'(L[{1'b0, idx}])) * 64'(fr)) >> FB);
    ln  = ((lg >>> 8) * LN2_Q30) >>> 37;   // Q22 * Q30 -> Q15, no overflow
    y_c = (x == '0) ? 32'h8000_0000 : 32'(ln);
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
