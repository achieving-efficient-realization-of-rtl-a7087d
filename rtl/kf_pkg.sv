// kf_pkg: types, constants and helper functions shared by the REDEFINE
// Kalman-filter tile array.
//
// It holds:
//  * the IEEE-754 binary64 rounding/packing helper that every floating point
//    unit uses (round to nearest even; subnormal results are flushed to zero
//    and subnormal inputs are read as zero -- a choice of this design),
//  * the RDP configuration encoding (the macro operations of the paper's
//    reconfigurable data path: DOT4/GEMM, QR and LU, plus scalar add/mul),
//  * the three instruction formats (floating point sequencer, local and
//    global load/store), and
//  * the single-flit NoC packet format.
// The paper fixes the register file (256 x 64 bit), the 256 KiB tile memory
// and the 4 multiplier / 3 adder data path; all encodings and widths below
// are this design's own choices.
package kf_pkg;

  typedef logic [63:0] fp64_t;

  localparam fp64_t FP64_QNAN = 64'h7FF8_0000_0000_0000;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NREGS      = 256;     // PE register file
  localparam int unsigned REG_AW     = 8;
  localparam int unsigned MEM_WORDS  = 32768;   // 256 KiB of 64-bit words
  localparam int unsigned MEM_AW     = 15;
  localparam int unsigned GOFF_AW    = 14;      // offset inside the global half
  localparam int unsigned IMEM_AW    = 10;      // instruction memory depth 1024
  localparam int unsigned COORD_W    = 4;       // mesh coordinates
  localparam int unsigned RDP_LAT    = 5;       // RDP pipeline levels

  // ------------------------------------------------------- RDP configurations
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_DOT4  = 4'd1,   // (x0y0 +/- x1y1) +/- (x2y2 +/- x3y3)       4 mul, 3 add
    OP_GEMM2 = 4'd2,   // x0y0 + x1y1                               2 mul, 1 add
    OP_GEMM3 = 4'd3,   // x0y0 +/- (x1y1 +/- x2y2)                  3 mul, 2 add
    OP_QR    = 4'd4,   // y3 - x3*(x0y0 + (x1y1 + x2y2))            4 mul, 3 add
    OP_LU    = 4'd5,   // x0y0 - x1y1                               2 mul, 1 add
    OP_FADD  = 4'd6,   // x0 +/- y0
    OP_FMUL  = 4'd7,   // x0 * y0
    OP_FDIV  = 4'd8,   // x0 / y0
    OP_FSQRT = 4'd9,   // sqrt(x0)
    OP_SYNC  = 4'd10,  // barrier with the load/store engines
    OP_HALT  = 4'd15
  } fp_op_e;

  // Floating point sequencer instruction (32 bits).
  // X operands are registers ra..ra+3, Y operands rb..rb+3 (modulo 256).
  typedef struct packed {
    fp_op_e           op;     // [31:28]
    logic [2:0]       sgn;    // [27:25] 1 = subtract at adder s0/s1/s2
    logic             rsvd;   // [24]
    logic [REG_AW-1:0] rd;    // [23:16]
    logic [REG_AW-1:0] ra;    // [15:8]
    logic [REG_AW-1:0] rb;    // [7:0]
  } fp_instr_t;

  // Local load/store instruction (32 bits)
  typedef enum logic [3:0] {
    LS_NOP = 4'd0, LS_LD = 4'd1, LS_ST = 4'd2, LS_SYNC = 4'd3, LS_HALT = 4'd15
  } ls_op_e;

  typedef struct packed {
    ls_op_e            op;    // [31:28]
    logic [REG_AW-1:0] reg_a; // [27:20]
    logic [4:0]        rsvd;  // [19:15]
    logic [MEM_AW-1:0] addr;  // [14:0]
  } ls_instr_t;

  // Global load/store instruction (48 bits)
  typedef enum logic [3:0] {
    GS_NOP = 4'd0, GS_GET = 4'd1, GS_PUT = 4'd2, GS_SYNC = 4'd3, GS_HALT = 4'd15
  } gs_op_e;

  typedef struct packed {
    gs_op_e             op;     // [47:44]
    logic [COORD_W-1:0] ty;     // [43:40] remote tile row
    logic [COORD_W-1:0] tx;     // [39:36] remote tile column
    logic [6:0]         rsvd;   // [35:29]
    logic [MEM_AW-1:0]  laddr;  // [28:14] local word address
    logic [GOFF_AW-1:0] goff;   // [13:0]  word offset in the remote global half
  } gs_instr_t;

  // ------------------------------------------------------------------ NoC
  typedef enum logic [2:0] {
    PK_GET_REQ = 3'd0,  // read remote global word, answer with GET_RSP
    PK_GET_RSP = 3'd1,  // data for a GET, addr = requester's local address
    PK_PUT_REQ = 3'd2,  // write remote global word, answer with PUT_ACK
    PK_PUT_ACK = 3'd3,
    PK_CFG_WR  = 3'd4,  // host: write memory or an instruction memory (sel)
    PK_CFG_RD  = 3'd5,  // host: read any memory word, answer with GET_RSP
    PK_START   = 3'd6,  // host: start the three instruction streams
    PK_DONE    = 3'd7   // tile -> host: all streams halted
  } pkt_type_e;

  typedef enum logic [1:0] {
    SEL_MEM = 2'd0, SEL_FP_IMEM = 2'd1, SEL_LS_IMEM = 2'd2, SEL_GS_IMEM = 2'd3
  } cfg_sel_e;

  typedef struct packed {
    pkt_type_e          ptype;
    logic [COORD_W-1:0] dst_x;
    logic [COORD_W-1:0] dst_y;
    logic [COORD_W-1:0] src_x;
    logic [COORD_W-1:0] src_y;
    cfg_sel_e           sel;
    logic [MEM_AW-1:0]  addr;
    logic [MEM_AW-1:0]  tag;
    fp64_t              data;
  } flit_t;

  // Per-cycle event pulses of a PE (observability of its stall mechanisms)
  typedef struct packed {
    logic fp_issue;        // FP result-producing instruction issued
    logic fp_stall_raw;    // register hazard
    logic fp_stall_reconf; // RDP drains before reconfiguration
    logic fp_stall_unit;   // FDIV/FSQRT busy
    logic ls_stall;        // local store waits for a load
    logic gs_stall;        // global request held by network or limit
    logic sync_wait;       // a stream waits at SYNC for the others
    logic done;            // DONE packet sent
  } pe_ev_t;

  // Router port numbering
  localparam int unsigned P_LOCAL = 0, P_NORTH = 1, P_EAST = 2, P_SOUTH = 3, P_WEST = 4;
  localparam int unsigned NPORTS = 5;

  // ------------------------------------------------------ FP helper functions
  function automatic logic fp_is_zero(fp64_t a);
    return a[62:52] == 11'd0;              // subnormals read as zero
  endfunction

  function automatic logic fp_is_inf(fp64_t a);
    return a[62:52] == 11'h7FF && a[51:0] == 52'd0;
  endfunction

  function automatic logic fp_is_nan(fp64_t a);
    return a[62:52] == 11'h7FF && a[51:0] != 52'd0;
  endfunction

  // Round to nearest even and pack. mant has its leading one at bit 52,
  // exp is the biased exponent of that leading one (may be out of range).
  function automatic fp64_t fp_round_pack(logic sign, logic signed [13:0] exp,
                                          logic [52:0] mant, logic guard,
                                          logic sticky);
    logic [53:0]        m;
    logic signed [13:0] e;
    logic               inc;
    inc = guard & (sticky | mant[0]);
    m   = {1'b0, mant} + 54'(inc);
    e   = exp;
    if (m[53]) begin
      m = m >> 1;
      e = e + 14'sd1;
    end
    if (e >= 14'sd2047)   return {sign, 11'h7FF, 52'd0};
    else if (e <= 14'sd0) return {sign, 63'd0};
    else                  return {sign, e[10:0], m[51:0]};
  endfunction

endpackage
