// fp64_sqrt: IEEE-754 binary64 square root (the FSQRT unit of the PE's
// floating point arithmetic unit).
//
// Digit-by-digit (restoring) integer square root, one result bit per cycle.
// The significand is placed in a 112-bit radicand so that the 56-bit root
// holds 53 significand bits plus guard and round bits; a non-zero final
// remainder gives sticky. Handshake as fp64_div: `start` captures `a`,
// `busy` until `done` pulses with `y`. Normal operands take 58 cycles from
// start to done, special ones 2.
// The paper only names FSQRT; algorithm, latency and special value handling
// (sqrt(-x) = quiet NaN, sqrt(-0) = -0, subnormals flushed) are this
// design's choices.
module fp64_sqrt
  import kf_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp64_t a,
  output logic  busy,
  output logic  done,
  output fp64_t y
);
  localparam int unsigned RBITS = 56;

  logic [111:0]       rad;       // radicand, consumed two bits per cycle
  logic [59:0]        rem;
  logic [RBITS-1:0]   root;
  logic [5:0]         cnt;
  logic signed [13:0] exp_r;
  logic               special;
  fp64_t              special_y;

  logic signed [13:0] in_e;
  logic               in_special;
  fp64_t              in_special_y;
  logic [111:0]       in_rad;

  always_comb begin
    in_e = 14'(a[62:52]) - 14'sd1023;
    if (in_e[0]) in_rad = {58'd0, 1'b1, a[51:0], 1'b0} << 58;
    else         in_rad = {59'd0, 1'b1, a[51:0]} << 58;
    in_special   = 1'b1;
    in_special_y = FP64_QNAN;
    if (fp_is_nan(a))       in_special_y = FP64_QNAN;
    else if (fp_is_zero(a)) in_special_y = {a[63], 63'd0};
    else if (a[63])         in_special_y = FP64_QNAN;
    else if (fp_is_inf(a))  in_special_y = a;
    else                    in_special   = 1'b0;
  end

  logic [59:0] rem_sh, trial;
  logic        rbit;
  always_comb begin
    rem_sh = {rem[57:0], rad[111:110]};
    trial  = {2'b00, root, 2'b01};
    rbit   = rem_sh >= trial;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= '0; rad <= '0; rem <= '0; root <= '0;
      cnt <= '0; exp_r <= '0; special <= 1'b0; special_y <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        special   <= in_special;
        special_y <= in_special_y;
        exp_r     <= (in_e >>> 1) + 14'sd1023;
        rad       <= in_rad;
        rem       <= '0;
        root      <= '0;
        cnt       <= '0;
      end else if (busy) begin
        if (special) begin
          busy <= 1'b0; done <= 1'b1; y <= special_y;
        end else if (cnt == 6'(RBITS)) begin
          busy <= 1'b0; done <= 1'b1;
          y    <= fp_round_pack(1'b0, exp_r, root[55:3], root[2], (|root[1:0]) | (rem != '0));
        end else begin
          rad  <= rad << 2;
          rem  <= rbit ? rem_sh - trial : rem_sh;
          root <= {root[RBITS-2:0], rbit};
          cnt  <= cnt + 6'd1;
        end
      end
    end
  end
endmodule
