// fp_sequencer: the Floating Point Sequencer of the PE -- instruction memory,
// decoder, issue logic and the floating point arithmetic unit (the RDP for
// the multiply/add macro operations, FDIV and FSQRT).
//
// After `start` it fetches one 32-bit instruction per cycle from its
// instruction memory (fp_instr_t in kf_pkg) and issues it in order:
//  * RDP operations (DOT4, GEMM2, GEMM3, QR, LU, FADD, FMUL) read X = ra..ra+3
//    and Y = rb..rb+3 from the register file and enter the 5-cycle RDP
//    pipeline, one per cycle; the result is written to rd.
//  * FDIV and FSQRT start the iterative units and block issue until done.
//  * SYNC waits until every result has been written back and then until the
//    load/store engines also reach their SYNC (sync_go); HALT stops once every
//    issued operation has written back.
// Stalls (reported on the ev_* outputs, one pulse per stalled cycle):
//  * ev_stall_raw    a source or the destination register has a result
//                    still in flight (scoreboard of pending writes),
//  * ev_stall_reconf the RDP configuration differs from the one of the
//                    operations still in the RDP pipeline: the RDP must drain
//                    before it is reconfigured,
//  * ev_stall_unit   FDIV/FSQRT busy, or an FDIV/FSQRT waiting for the RDP
//                    to drain so that the single write port is never shared.
// The paper describes the sequencer's parts (instruction memory, decoder,
// FPU with FDIV, FSQRT and the RDP) and that the PE stalls on pipeline
// hazards, which software fills with independent instructions; the
// instruction format, the scoreboard and the stall rules are this design's.
// The instruction memory is written through imem_we/addr/wdata (from the
// network) and read combinationally.
module fp_sequencer
  import kf_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  logic [31:0]        imem_wdata,
  // register file
  output logic [REG_AW-1:0]  rf_ra,
  output logic [REG_AW-1:0]  rf_rb,
  input  fp64_t              rf_rx [4],
  input  fp64_t              rf_ry [4],
  output logic               rf_we,
  output logic [REG_AW-1:0]  rf_wa,
  output fp64_t              rf_wd,
  // barrier
  output logic               at_sync,
  input  logic               sync_go,
  output logic               halted,
  // events
  output logic               ev_issue,
  output logic               ev_stall_raw,
  output logic               ev_stall_reconf,
  output logic               ev_stall_unit
);
  localparam int unsigned IAW = $clog2(IMEM_DEPTH);

  logic [31:0]     imem [IMEM_DEPTH];
  logic [IAW-1:0]  pc;
  logic            running;
  fp_instr_t       ins;
  logic [NREGS-1:0] pending;
  fp_op_e          cur_cfg;

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
  end

  assign ins   = fp_instr_t'(imem[pc]);
  assign rf_ra = ins.ra;
  assign rf_rb = ins.rb;

  // ---------------------------------------------------------------- decode
  logic       is_rdp, is_div, is_sqrt, writes;
  int unsigned nx, ny;
  always_comb begin
    is_rdp  = ins.op inside {OP_DOT4, OP_GEMM2, OP_GEMM3, OP_QR, OP_LU, OP_FADD, OP_FMUL};
    is_div  = ins.op == OP_FDIV;
    is_sqrt = ins.op == OP_FSQRT;
    writes  = is_rdp || is_div || is_sqrt;
    unique case (ins.op)
      OP_DOT4, OP_QR:          begin nx = 4; ny = 4; end
      OP_GEMM3:                begin nx = 3; ny = 3; end
      OP_GEMM2, OP_LU:         begin nx = 2; ny = 2; end
      OP_FADD, OP_FMUL, OP_FDIV: begin nx = 1; ny = 1; end
      OP_FSQRT:                begin nx = 1; ny = 0; end
      default:                 begin nx = 0; ny = 0; end
    endcase
  end

  // ---------------------------------------------------------------- units
  logic  rdp_valid, rdp_out_valid, rdp_idle;
  logic [REG_AW-1:0] rdp_out_tag;
  fp64_t rdp_out_y;
  logic  div_start, div_busy, div_done, sqrt_start, sqrt_busy, sqrt_done;
  fp64_t div_y, sqrt_y;
  logic [REG_AW-1:0] long_rd;

  rdp #(.TAG_W(REG_AW)) u_rdp (
    .clk, .rst_n, .in_valid(rdp_valid), .in_cfg(ins.op), .in_sgn(ins.sgn),
    .in_x(rf_rx), .in_y(rf_ry), .in_tag(ins.rd),
    .out_valid(rdp_out_valid), .out_tag(rdp_out_tag), .out_y(rdp_out_y), .idle(rdp_idle));

  fp64_div u_fdiv (.clk, .rst_n, .start(div_start), .a(rf_rx[0]), .b(rf_ry[0]),
                   .busy(div_busy), .done(div_done), .y(div_y));
  fp64_sqrt u_fsqrt (.clk, .rst_n, .start(sqrt_start), .a(rf_rx[0]),
                     .busy(sqrt_busy), .done(sqrt_done), .y(sqrt_y));

  // ---------------------------------------------------------------- issue
  logic src_busy, long_busy, quiet, can_issue, advance;
  always_comb begin
    src_busy = writes && pending[ins.rd];
    for (int i = 0; i < 4; i++) begin
      if (i < nx && pending[REG_AW'(ins.ra + REG_AW'(i))]) src_busy = 1'b1;
      if (i < ny && pending[REG_AW'(ins.rb + REG_AW'(i))]) src_busy = 1'b1;
    end
    long_busy = div_busy || sqrt_busy;
    quiet     = rdp_idle && !long_busy && pending == '0;

    ev_stall_unit   = running && (long_busy || ((is_div || is_sqrt) && !rdp_idle));
    ev_stall_raw    = running && !ev_stall_unit && src_busy;
    ev_stall_reconf = running && !ev_stall_unit && !src_busy && is_rdp &&
                      !rdp_idle && cur_cfg != ins.op;
    can_issue = running && !ev_stall_unit && !ev_stall_raw && !ev_stall_reconf;

    at_sync    = running && ins.op == OP_SYNC && quiet;
    advance    = can_issue && (ins.op != OP_SYNC || (at_sync && sync_go)) && ins.op != OP_HALT;
    ev_issue   = can_issue && writes;
    rdp_valid  = can_issue && is_rdp;
    div_start  = can_issue && is_div;
    sqrt_start = can_issue && is_sqrt;
  end

  // -------------------------------------------------------------- writeback
  always_comb begin
    rf_we = 1'b0; rf_wa = rdp_out_tag; rf_wd = rdp_out_y;
    if (rdp_out_valid) begin
      rf_we = 1'b1;
    end else if (div_done || sqrt_done) begin
      rf_we = 1'b1; rf_wa = long_rd; rf_wd = div_done ? div_y : sqrt_y;
    end
  end

  // scoreboard update: clear on write-back, set on issue
  logic [NREGS-1:0] pending_nx;
  always_comb begin
    pending_nx = pending;
    if (rf_we) pending_nx[rf_wa] = 1'b0;
    if (can_issue && writes) pending_nx[ins.rd] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; running <= 1'b0; halted <= 1'b1; pending <= '0;
      cur_cfg <= OP_NOP; long_rd <= '0;
    end else begin
      if (start) begin
        pc <= '0; running <= 1'b1; halted <= 1'b0;
      end else if (running) begin
        if (can_issue && ins.op == OP_HALT && quiet) begin
          running <= 1'b0; halted <= 1'b1;
        end
        if (advance) pc <= pc + 1'b1;
      end
      if (rdp_valid) cur_cfg <= ins.op;
      if (div_start || sqrt_start) long_rd <= ins.rd;
      pending <= pending_nx;
    end
  end

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
      !(rdp_out_valid && (div_done || sqrt_done)))
    else $error("fp_sequencer: RDP and FDIV/FSQRT write back in the same cycle");
endmodule
