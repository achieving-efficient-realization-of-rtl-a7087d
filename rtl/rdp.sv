// rdp: the Reconfigurable Data Path of the PE -- four binary64 multipliers
// (M0..M3) and three adder/subtractors (A0..A2) whose interconnect is chosen
// per instruction to form one macro operation of dgemm, dgeqrf or dgetrf.
//
// Configurations (x = X operands, y = Y operands, s = sign bits, 1 = minus):
//   DOT4  (GEMM, full tree)   ((x0*y0 s0 x1*y1) s2 (x2*y2 s1 x3*y3))
//   GEMM3 (GEMM, 3 products)  (x0*y0 s2 (x1*y1 s1 x2*y2))
//   GEMM2 (GEMM, 2 products)  (x0*y0 + x1*y1)
//   QR    (Householder update) y3 - x3*(x0*y0 + (x1*y1 + x2*y2))
//   LU    (elimination update) x0*y0 - x1*y1
//   FADD / FMUL               x0 s0 y0 / x0*y0  (the scalar adder/multiplier)
// The node graphs are those of the paper's RDP configuration figure; the
// operand order, sign bits and the scalar configurations are this design's.
//
// Timing: a five-level pipeline, one node level per cycle
//   L1 M0..M2 (and M3 for DOT4)   L2 A0, A1   L3 A2   L4 M3 (QR)   L5 A0 (QR)
// so every configuration has the same latency of 5 cycles from in_valid to
// out_valid and can accept one operation per cycle. Because QR reuses M3 and
// A0 at levels 4/5 that DOT4, GEMM2, LU and FADD use at levels 1/2, each
// node selects its inputs by the configuration of the operation at its
// level, and operations of a different configuration may only enter once the
// pipeline has drained (`idle`); the issuing sequencer enforces this and an
// assertion checks it. Pipelining the nodes this way (instead of chaining
// them combinationally) keeps the reconfigurable interconnect free of
// combinational loops. The latency is this design's choice; the paper does
// not give it.
module rdp
  import kf_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fp_op_e           in_cfg,
  input  logic [2:0]       in_sgn,
  input  fp64_t            in_x [4],
  input  fp64_t            in_y [4],
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fp64_t            out_y,
  output logic             idle
);
  typedef struct packed {
    logic             v;
    fp_op_e           cfg;
    logic [2:0]       sgn;
    logic [TAG_W-1:0] tag;
  } ctl_t;

  ctl_t  c1, c2, c3, c4, c5;
  fp64_t p [4];              // level-1 results
  fp64_t q0, q1;             // level-2 results
  fp64_t r3;                 // level-3 result
  fp64_t r4;                 // level-4 result
  fp64_t r5;                 // level-5 result
  fp64_t x3_1, y3_1, x3_2, y3_2, x3_3, y3_3, y3_4;

  // ---------------------------------------------------------------- nodes
  fp64_t m_a [4], m_b [4], m_y [4];
  fp64_t a_a [3], a_b [3], a_y [3];
  logic  a_s [3];

  for (genvar i = 0; i < 4; i++) begin : g_mul
    fp64_mul u_mul (.a(m_a[i]), .b(m_b[i]), .y(m_y[i]));
  end
  for (genvar i = 0; i < 3; i++) begin : g_add
    fp64_addsub u_add (.a(a_a[i]), .b(a_b[i]), .sub(a_s[i]), .y(a_y[i]));
  end

  logic qr_at4, qr_at5;
  assign qr_at4 = c3.v && c3.cfg == OP_QR;   // operation entering level 4
  assign qr_at5 = c4.v && c4.cfg == OP_QR;   // operation entering level 5

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      m_a[i] = in_x[i];
      m_b[i] = in_y[i];
    end
    // M3: level 1 for DOT4, level 4 for QR
    m_a[3] = qr_at4 ? x3_3 : in_x[3];
    m_b[3] = qr_at4 ? r3   : in_y[3];

    // A0: level 2 (x0y0 s x1y1, or x0 s y0 for FADD), level 5 for QR
    if (qr_at5) begin
      a_a[0] = y3_4; a_b[0] = r4; a_s[0] = 1'b1;
    end else begin
      a_a[0] = p[0]; a_b[0] = p[1];
      unique case (c1.cfg)
        OP_LU:          a_s[0] = 1'b1;
        OP_DOT4, OP_FADD: a_s[0] = c1.sgn[0];
        default:        a_s[0] = 1'b0;
      endcase
    end
    // A1: level 2
    if (c1.cfg == OP_DOT4) begin
      a_a[1] = p[2]; a_b[1] = p[3]; a_s[1] = c1.sgn[1];
    end else begin
      a_a[1] = p[1]; a_b[1] = p[2];
      a_s[1] = (c1.cfg == OP_GEMM3) ? c1.sgn[1] : 1'b0;
    end
    // A2: level 3
    a_a[2] = q0; a_b[2] = q1;
    a_s[2] = (c2.cfg == OP_DOT4 || c2.cfg == OP_GEMM3) ? c2.sgn[2] : 1'b0;
  end

  // ------------------------------------------------------------ pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1 <= '0; c2 <= '0; c3 <= '0; c4 <= '0; c5 <= '0;
      p  <= '{default: '0};
      q0 <= '0; q1 <= '0; r3 <= '0; r4 <= '0; r5 <= '0;
      x3_1 <= '0; y3_1 <= '0; x3_2 <= '0; y3_2 <= '0; x3_3 <= '0; y3_3 <= '0; y3_4 <= '0;
    end else begin
      // level 1
      c1 <= '{v: in_valid, cfg: in_cfg, sgn: in_sgn, tag: in_tag};
      if (in_cfg == OP_FADD) begin
        p[0] <= in_x[0]; p[1] <= in_y[0];
      end else begin
        p[0] <= m_y[0];  p[1] <= m_y[1];
      end
      p[2] <= m_y[2];
      p[3] <= m_y[3];
      x3_1 <= in_x[3]; y3_1 <= in_y[3];
      // level 2
      c2 <= c1;
      unique case (c1.cfg)
        OP_DOT4, OP_GEMM2, OP_LU, OP_FADD: q0 <= a_y[0];
        default:                           q0 <= p[0];   // GEMM3, QR, FMUL
      endcase
      q1 <= a_y[1];
      x3_2 <= x3_1; y3_2 <= y3_1;
      // level 3
      c3 <= c2;
      unique case (c2.cfg)
        OP_DOT4, OP_GEMM3, OP_QR: r3 <= a_y[2];
        default:                  r3 <= q0;
      endcase
      x3_3 <= x3_2; y3_3 <= y3_2;
      // level 4
      c4 <= c3;
      r4   <= qr_at4 ? m_y[3] : r3;
      y3_4 <= y3_3;
      // level 5
      c5 <= c4;
      r5 <= qr_at5 ? a_y[0] : r4;
    end
  end

  assign out_valid = c5.v;
  assign out_tag   = c5.tag;
  assign out_y     = r5;
  assign idle      = !(c1.v || c2.v || c3.v || c4.v || c5.v);

  // A QR operation in levels 4/5 owns M3 and A0: nothing may use them at
  // levels 1/2 at the same time.
  a_m3_free: assert property (@(posedge clk) disable iff (!rst_n)
      !(qr_at4 && in_valid && in_cfg == OP_DOT4))
    else $error("rdp: M3 needed by QR at level 4 and DOT4 at level 1");
  a_a0_free: assert property (@(posedge clk) disable iff (!rst_n)
      !(qr_at5 && c1.v && c1.cfg inside {OP_DOT4, OP_GEMM2, OP_LU, OP_FADD}))
    else $error("rdp: A0 needed by QR at level 5 and another op at level 2");
endmodule
