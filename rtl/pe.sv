// pe: the compute Processing Element of a tile -- a Load-Store CFU (local
// and global load/store engines, each with its own instruction memory and
// decoder) and a Floating Point Sequencer (instruction memory, decoder, the
// 256 x 64-bit register file and the FPU: RDP, FDIV, FSQRT).
//
// Three instruction streams run concurrently: the local load/store engine
// moves words between the tile memory and the register file, the global one
// between the tile memory and other tiles' global memory, and the sequencer
// computes on registers. They meet at SYNC instructions: a stream at SYNC
// waits until each of the other two is also at SYNC (with its own
// transfers completed) or halted, and all waiting streams then go on
// together. This lets a program overlap loading the next block with
// computing the current one, as in the paper's overlapped schedule.
// From the network the PE takes instruction memory writes (CFG_WR), START
// (which restarts all three streams at address 0 and remembers the sender)
// and the responses of its global requests; when all streams have halted it
// sends one DONE packet to the sender of START.
// The partition into Load-Store CFU and Floating Point Sequencer follows the
// paper's PE figure; the SYNC barrier, START/DONE and instruction formats are
// this design's.
module pe
  import kf_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // network (through the tile arbiter)
  input  logic               in_valid,
  output logic               in_ready,
  input  flit_t              in_flit,
  output logic               out_valid,
  input  logic               out_ready,
  output flit_t              out_flit,
  // tile memory: L port
  output logic               l_en,
  output logic               l_we,
  output logic [MEM_AW-1:0]  l_addr,
  output fp64_t              l_wdata,
  input  fp64_t              l_rdata,
  // tile memory: GR / GW ports
  output logic               gr_en,
  output logic [MEM_AW-1:0]  gr_addr,
  input  fp64_t              gr_rdata,
  output logic               gw_we,
  output logic [MEM_AW-1:0]  gw_addr,
  output fp64_t              gw_wdata,
  output pe_ev_t             ev
);
  localparam int unsigned IAW = $clog2(IMEM_DEPTH);

  // ------------------------------------------------------ inbound packets
  logic start, cfg_fp, cfg_ls, cfg_gs, gs_in_valid, gs_in_ready;
  logic [COORD_W-1:0] host_x, host_y;
  always_comb begin
    start  = in_valid && in_flit.ptype == PK_START;
    cfg_fp = in_valid && in_flit.ptype == PK_CFG_WR && in_flit.sel == SEL_FP_IMEM;
    cfg_ls = in_valid && in_flit.ptype == PK_CFG_WR && in_flit.sel == SEL_LS_IMEM;
    cfg_gs = in_valid && in_flit.ptype == PK_CFG_WR && in_flit.sel == SEL_GS_IMEM;
    gs_in_valid = in_valid && in_flit.ptype inside {PK_GET_RSP, PK_PUT_ACK};
    in_ready = gs_in_valid ? gs_in_ready : 1'b1;
  end

  // ------------------------------------------------------ register file
  logic [REG_AW-1:0] rf_ra, rf_rb, ls_raddr, fp_wa, ls_wa;
  fp64_t rf_rx [4], rf_ry [4], ls_rdata, fp_wd, ls_wd;
  logic  fp_we, ls_we;

  fp_regfile #(.N(NREGS)) u_rf (
    .clk, .ra(rf_ra), .rb(rf_rb), .rx(rf_rx), .ry(rf_ry),
    .rs_addr(ls_raddr), .rs_data(ls_rdata),
    .we0(fp_we), .wa0(fp_wa), .wd0(fp_wd), .we1(ls_we), .wa1(ls_wa), .wd1(ls_wd));

  // ------------------------------------------------------ engines
  logic fp_at, fp_halt, ls_at, ls_halt, gs_at, gs_halt, sync_go;
  logic gs_out_valid, gs_out_ready;
  flit_t gs_out_flit;

  assign sync_go = (fp_at || fp_halt) && (ls_at || ls_halt) && (gs_at || gs_halt);

  fp_sequencer #(.IMEM_DEPTH(IMEM_DEPTH)) u_fps (
    .clk, .rst_n, .start,
    .imem_we(cfg_fp), .imem_addr(IAW'(in_flit.addr)), .imem_wdata(in_flit.data[31:0]),
    .rf_ra, .rf_rb, .rf_rx, .rf_ry, .rf_we(fp_we), .rf_wa(fp_wa), .rf_wd(fp_wd),
    .at_sync(fp_at), .sync_go, .halted(fp_halt),
    .ev_issue(ev.fp_issue), .ev_stall_raw(ev.fp_stall_raw),
    .ev_stall_reconf(ev.fp_stall_reconf), .ev_stall_unit(ev.fp_stall_unit));

  ls_local #(.IMEM_DEPTH(IMEM_DEPTH)) u_lsl (
    .clk, .rst_n, .start,
    .imem_we(cfg_ls), .imem_addr(IAW'(in_flit.addr)), .imem_wdata(in_flit.data[31:0]),
    .mem_en(l_en), .mem_we(l_we), .mem_addr(l_addr), .mem_wdata(l_wdata), .mem_rdata(l_rdata),
    .rf_raddr(ls_raddr), .rf_rdata(ls_rdata), .rf_we(ls_we), .rf_waddr(ls_wa), .rf_wdata(ls_wd),
    .at_sync(ls_at), .sync_go, .halted(ls_halt), .ev_stall(ev.ls_stall));

  ls_global #(.IMEM_DEPTH(IMEM_DEPTH)) u_lsg (
    .clk, .rst_n, .my_x, .my_y, .start,
    .imem_we(cfg_gs), .imem_addr(IAW'(in_flit.addr)), .imem_wdata(in_flit.data[47:0]),
    .mem_ren(gr_en), .mem_raddr(gr_addr), .mem_rdata(gr_rdata),
    .mem_we(gw_we), .mem_waddr(gw_addr), .mem_wdata(gw_wdata),
    .out_valid(gs_out_valid), .out_ready(gs_out_ready), .out_flit(gs_out_flit),
    .in_valid(gs_in_valid), .in_ready(gs_in_ready), .in_flit,
    .at_sync(gs_at), .sync_go, .halted(gs_halt), .ev_stall(ev.gs_stall));

  assign ev.sync_wait = (fp_at || ls_at || gs_at) && !sync_go;

  // ------------------------------------------------------ START / DONE
  logic started, done_pend;
  assign done_pend = started && fp_halt && ls_halt && gs_halt && !start;

  always_comb begin
    out_valid    = done_pend || gs_out_valid;
    gs_out_ready = out_ready && !done_pend;
    out_flit     = gs_out_flit;
    if (done_pend) begin
      out_flit       = '0;
      out_flit.ptype = PK_DONE;
      out_flit.dst_x = host_x;
      out_flit.dst_y = host_y;
      out_flit.src_x = my_x;
      out_flit.src_y = my_y;
    end
    ev.done = done_pend && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started <= 1'b0; host_x <= '0; host_y <= '0;
    end else begin
      if (start) begin
        started <= 1'b1; host_x <= in_flit.src_x; host_y <= in_flit.src_y;
      end else if (done_pend && out_ready) begin
        started <= 1'b0;
      end
    end
  end
endmodule
