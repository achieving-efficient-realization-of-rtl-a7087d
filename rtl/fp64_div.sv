// fp64_div: IEEE-754 binary64 divider (the FDIV unit of the PE's floating
// point arithmetic unit).
//
// Radix-2 restoring division, one quotient bit per cycle. On `start` the
// operands are captured; special operands (NaN, inf, zero) finish in the next
// cycle, normal operands take 56 iteration cycles that produce the 53
// significand bits plus guard and round bits, the remainder giving sticky.
// `done` pulses for one cycle with the rounded result on `y`, which then
// holds until the next start. `busy` is high from start until done.
// The paper only names FDIV; the algorithm, latency (58 cycles from start to
// done for normal operands) and special value handling (subnormals flushed to
// zero, quiet NaN 7FF8..0) are this design's choices.
module fp64_div
  import kf_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp64_t a,
  input  fp64_t b,
  output logic  busy,
  output logic  done,
  output fp64_t y
);
  localparam int unsigned QBITS = 56;

  logic [54:0]        rem;     // partial remainder, < 2*divisor
  logic [52:0]        dvs;
  logic [QBITS-1:0]   quo;
  logic [5:0]         cnt;
  logic               sign;
  logic signed [13:0] exp_q;
  logic               special;
  fp64_t              special_y;

  // operand analysis of the inputs at start
  logic               in_sign;
  fp64_t              in_special_y;
  logic               in_special;
  logic signed [13:0] in_exp;
  logic [52:0]        ma, mb;
  logic               ma_lt;

  always_comb begin
    in_sign = a[63] ^ b[63];
    ma      = {1'b1, a[51:0]};
    mb      = {1'b1, b[51:0]};
    ma_lt   = ma < mb;
    in_exp  = 14'(a[62:52]) - 14'(b[62:52]) + 14'sd1023 - (ma_lt ? 14'sd1 : 14'sd0);
    in_special   = 1'b1;
    in_special_y = FP64_QNAN;
    if (fp_is_nan(a) || fp_is_nan(b) || (fp_is_inf(a) && fp_is_inf(b)) ||
        (fp_is_zero(a) && fp_is_zero(b)))
      in_special_y = FP64_QNAN;
    else if (fp_is_inf(a) || fp_is_zero(b))
      in_special_y = {in_sign, 11'h7FF, 52'd0};
    else if (fp_is_zero(a) || fp_is_inf(b))
      in_special_y = {in_sign, 63'd0};
    else
      in_special = 1'b0;
  end

  logic [54:0] rem_next;
  logic        qbit;
  always_comb begin
    qbit     = rem >= {2'b00, dvs};
    rem_next = (qbit ? rem - {2'b00, dvs} : rem) << 1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= '0; rem <= '0; dvs <= '0; quo <= '0;
      cnt <= '0; sign <= 1'b0; exp_q <= '0; special <= 1'b0; special_y <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        sign      <= in_sign;
        exp_q     <= in_exp;
        special   <= in_special;
        special_y <= in_special_y;
        rem       <= ma_lt ? {1'b0, ma, 1'b0} : {2'b00, ma};
        dvs       <= mb;
        quo       <= '0;
        cnt       <= '0;
      end else if (busy) begin
        if (special) begin
          busy <= 1'b0; done <= 1'b1; y <= special_y;
        end else if (cnt == 6'(QBITS)) begin
          busy <= 1'b0; done <= 1'b1;
          y    <= fp_round_pack(sign, exp_q, quo[55:3], quo[2], (|quo[1:0]) | (rem != '0));
        end else begin
          quo <= {quo[QBITS-2:0], qbit};
          rem <= rem_next;
          cnt <= cnt + 6'd1;
        end
      end
    end
  end
endmodule
