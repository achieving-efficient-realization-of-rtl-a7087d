// fp64_addsub: IEEE-754 binary64 adder/subtractor, one of the three '+/-'
// nodes of the reconfigurable data path (RDP).
//
// Purely combinational. The operand of larger magnitude is kept, the other is
// aligned to it with guard, round and sticky bits, the significands are added
// or subtracted, the result is renormalised with a leading-zero count and
// rounded to nearest even.
// Interface: y = a + b when sub = 0, y = a - b when sub = 1.
// The paper gives only "adder/subtractor" in double precision; special value
// handling is this design's choice (subnormals flush to zero, NaN or
// inf - inf give the quiet NaN 7FF8..0, an exact zero difference is +0).
module fp64_addsub
  import kf_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  input  logic  sub,
  output fp64_t y
);
  logic        sa, sb, sl;
  logic [62:0] mag_a, mag_b;
  logic        swap;
  logic [10:0] el, es;
  logic [55:0] ml, ms;            // 1.f followed by guard, round, sticky
  logic [11:0] d;
  logic [111:0] ext;
  logic [55:0] ms_al;
  logic [56:0] sum;
  logic [55:0] norm;
  logic signed [13:0] e;
  int unsigned lz;

  always_comb begin
    sa    = a[63];
    sb    = b[63] ^ sub;
    mag_a = fp_is_zero(a) ? 63'd0 : a[62:0];
    mag_b = fp_is_zero(b) ? 63'd0 : b[62:0];
    swap  = mag_b > mag_a;
    sl    = swap ? sb : sa;
    el    = swap ? b[62:52] : a[62:52];
    es    = swap ? a[62:52] : b[62:52];
    ml    = {1'b1, (swap ? b[51:0] : a[51:0]), 3'b000};
    ms    = {1'b1, (swap ? a[51:0] : b[51:0]), 3'b000};
    d     = 12'(el) - 12'(es);
    if (d > 12'd60) d = 12'd60;
    ext   = {ms, 56'd0} >> d;
    ms_al = ext[111:56] | {55'd0, |ext[55:0]};
    e     = 14'(el);
    lz    = 0;
    norm  = '0;
    if (sa == sb) begin
      sum = {1'b0, ml} + {1'b0, ms_al};
      if (sum[56]) begin
        norm = sum[56:1] | {55'd0, sum[0]};
        e    = e + 14'sd1;
      end else begin
        norm = sum[55:0];
      end
    end else begin
      sum = {1'b0, ml} - {1'b0, ms_al};
      for (int i = 55; i >= 0; i--) begin
        if (sum[i] && lz == 0) lz = 56 - i;
      end
      if (lz > 0) lz = lz - 1;
      norm = sum[55:0] << lz;
      e    = e - 14'(lz);
    end

    if (fp_is_nan(a) || fp_is_nan(b) ||
        (fp_is_inf(a) && fp_is_inf(b) && sa != sb))
      y = FP64_QNAN;
    else if (fp_is_inf(a))
      y = {sa, 11'h7FF, 52'd0};
    else if (fp_is_inf(b))
      y = {sb, 11'h7FF, 52'd0};
    else if (fp_is_zero(a) && fp_is_zero(b))
      y = {sa & sb, 63'd0};
    else if (fp_is_zero(a))
      y = {sb, b[62:0]};
    else if (fp_is_zero(b))
      y = a;
    else if (sa != sb && sum == 57'd0)
      y = 64'd0;
    else
      y = fp_round_pack(sl, e, norm[55:3], norm[2], |norm[1:0]);
  end
endmodule
