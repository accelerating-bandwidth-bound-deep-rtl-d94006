// fp32_add: combinational IEEE-754 single-precision adder (helper of simd_unit and
// copy_engine).
//
// The operand with the larger magnitude is aligned against the other with guard, round and
// sticky bits, the mantissas are added or subtracted, the result is renormalised with a
// leading-zero count and rounded to nearest even. Subnormals flush to zero; infinities and NaN
// propagate (inf - inf gives the quiet NaN 0x7fc00000). An exact zero difference is +0. These
// arithmetic details are this design's choice; the paper only names floating-point SIMD units
// and a reduction of partial results.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] x, z;                 // x has the larger magnitude
  logic        sx, sz;
  logic [7:0]  ex, ez, d;
  logic [26:0] mx, mz, mzs;          // 1.23 mantissa + guard, round, sticky
  logic [27:0] s;
  logic signed [9:0] e;
  logic [4:0]  lz;
  logic        lzf;
  logic [24:0] mr;
  logic        rnd;

  always_comb begin
    if (a[30:0] >= b[30:0]) begin
      x = a;
      z = b;
    end else begin
      x = b;
      z = a;
    end
    {sx, ex} = x[31:23];
    {sz, ez} = z[31:23];
    mx = (ex == 0) ? 27'b0 : {1'b1, x[22:0], 3'b0};
    mz = (ez == 0) ? 27'b0 : {1'b1, z[22:0], 3'b0};
    if (ez == 0) d = 8'd0;
    else         d = ex - ez;
    if (d >= 8'd27) mzs = {26'b0, |mz};
    else            mzs = (mz >> d) | {26'b0, |(mz & ((27'd1 << d) - 27'd1))};
    e = $signed({2'b0, ex});
    if (sx == sz) s = {1'b0, mx} + {1'b0, mzs};
    else          s = {1'b0, mx} - {1'b0, mzs};
    if (s[27]) begin
      s = {1'b0, s[27:2], s[1] | s[0]};
      e = e + 10'sd1;
    end
    lz  = 5'd0;
    lzf = 1'b0;
    for (int i = 26; i >= 0; i--)
      if (!lzf) begin
        if (s[i]) lzf = 1'b1;
        else      lz  = lz + 5'd1;
      end
    if (lzf) begin
      s = s << lz;
      e = e - $signed({5'b0, lz});
    end
    rnd = s[2] & (s[1] | s[0] | s[3]);
    mr  = {1'b0, s[26:3]} + {24'b0, rnd};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 10'sd1;
    end
    if ((ex == 8'hff && x[22:0] != 0) || (ez == 8'hff && z[22:0] != 0) ||
        (ex == 8'hff && ez == 8'hff && sx != sz))
      y = 32'h7fc00000;
    else if (ex == 8'hff)
      y = {sx, 8'hff, 23'b0};
    else if (ex == 0)
      y = 32'b0;
    else if (!lzf)
      y = 32'b0;
    else if (e >= 10'sd255)
      y = {sx, 8'hff, 23'b0};
    else if (e <= 10'sd0)
      y = {sx, 31'b0};
    else
      y = {sx, e[7:0], mr[22:0]};
  end
endmodule
