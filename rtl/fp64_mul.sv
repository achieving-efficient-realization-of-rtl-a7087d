// fp64_mul: IEEE-754 binary64 multiplier, one of the four '*' nodes of the
// reconfigurable data path (RDP).
//
// Purely combinational: the 53x53-bit significand product is normalised by
// at most one position, rounded to nearest even and packed. The RDP registers
// the result, so one node result per cycle per node.
// Interface: y = a * b.
// The paper specifies double precision multipliers; the treatment of special
// values is this design's choice: subnormal inputs read as zero, subnormal
// results flush to zero, any NaN or inf*0 gives the quiet NaN 7FF8..0.
module fp64_mul
  import kf_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  output fp64_t y
);
  logic          s;
  logic [105:0]  prod;
  logic signed [13:0] e;
  logic [52:0]   mant;
  logic          guard, sticky;

  always_comb begin
    s    = a[63] ^ b[63];
    prod = {1'b1, a[51:0]} * {1'b1, b[51:0]};
    e    = 14'(a[62:52]) + 14'(b[62:52]) - 14'sd1023;
    if (prod[105]) begin
      mant   = prod[105:53];
      guard  = prod[52];
      sticky = |prod[51:0];
      e      = e + 14'sd1;
    end else begin
      mant   = prod[104:52];
      guard  = prod[51];
      sticky = |prod[50:0];
    end
    if (fp_is_nan(a) || fp_is_nan(b) ||
        (fp_is_inf(a) && fp_is_zero(b)) || (fp_is_zero(a) && fp_is_inf(b)))
      y = FP64_QNAN;
    else if (fp_is_inf(a) || fp_is_inf(b))
      y = {s, 11'h7FF, 52'd0};
    else if (fp_is_zero(a) || fp_is_zero(b))
      y = {s, 63'd0};
    else
      y = fp_round_pack(s, e, mant, guard, sticky);
  end
endmodule
