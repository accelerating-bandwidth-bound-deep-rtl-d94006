// fp32_mul: combinational IEEE-754 single-precision multiplier (helper of simd_unit).
//
// Round to nearest even. Subnormal inputs and results are flushed to zero; infinities and NaN
// are propagated (NaN is returned as the quiet NaN 0x7fc00000). The paper only says the PIM
// SIMD units execute floating-point operations on 32-bit words; the format, the rounding mode
// and the flush-to-zero choice are this design's.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] ma, mb;
  logic [47:0] p;
  logic [23:0] m;          // 1.23 result before rounding (hidden bit included)
  logic        g, st;
  logic signed [10:0] e;
  logic [24:0] mr;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    sy = sa ^ sb;
    p  = {1'b1, ma} * {1'b1, mb};
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = |p[22:0];
      e  = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd126;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = |p[21:0];
      e  = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd127;
    end
    mr = {1'b0, m} + {24'b0, g & (st | m[0])};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if ((ea == 8'hff && ma != 0) || (eb == 8'hff && mb != 0) ||
        (ea == 8'hff && eb == 8'h00) || (eb == 8'hff && ea == 8'h00))
      y = 32'h7fc00000;
    else if (ea == 8'hff || eb == 8'hff)
      y = {sy, 8'hff, 23'b0};
    else if (ea == 8'h00 || eb == 8'h00)
      y = {sy, 31'b0};
    else if (e >= 11'sd255)
      y = {sy, 8'hff, 23'b0};
    else if (e <= 11'sd0)
      y = {sy, 31'b0};
    else
      y = {sy, e[7:0], mr[22:0]};
  end
endmodule
