// tb_pe: self-checking test of the compute PE together with its memory PE,
// without a router. The testbench plays the network: it writes operands into
// the memory PE and three programs into the PE's instruction memories,
// sends START, and acts as a remote tile (2,0) that answers the PE's
// PUT_REQ/GET_REQ packets after a delay of 6..30 cycles. The programs load 16
// operands, run GEMM2, GEMM3, FADD, FMUL, QR, then a dependent FDIV ->
// FSQRT -> FADD chain, store the results, PUT them to the remote tile and GET
// two remote words. All values are compared bit for bit with IEEE double
// arithmetic; DONE must go to the START sender; the PE's raw, unit, sync and
// global-stall events must each have happened.
module tb_pe;
  import kf_pkg::*;
  import tb_host_pkg::*;
  localparam int HX = 5, HY = 0;
  logic clk = 1'b0, rst_n = 1'b0;

  logic  p_in_v, p_in_r, p_out_v, p_out_r, m_in_v, m_in_r, m_out_v, m_out_r;
  flit_t p_in_f, p_out_f, m_in_f, m_out_f;
  logic l_en, l_we, gr_en, gw_we;
  logic [MEM_AW-1:0] l_addr, gr_addr, gw_addr;
  fp64_t l_wdata, l_rdata, gr_rdata, gw_wdata;
  pe_ev_t ev;
  int checks = 0, failures = 0;
  int n_done = 0, n_raw = 0, n_unit = 0, n_sync = 0, n_gs = 0, n_reconf = 0;

  pe dut (.clk, .rst_n, .my_x(4'd0), .my_y(4'd0),
          .in_valid(p_in_v), .in_ready(p_in_r), .in_flit(p_in_f),
          .out_valid(p_out_v), .out_ready(p_out_r), .out_flit(p_out_f),
          .l_en, .l_we, .l_addr, .l_wdata, .l_rdata,
          .gr_en, .gr_addr, .gr_rdata, .gw_we, .gw_addr, .gw_wdata, .ev);
  memory_pe u_mem (.clk, .rst_n, .my_x(4'd0), .my_y(4'd0),
          .l_en, .l_we, .l_addr, .l_wdata, .l_rdata,
          .gr_en, .gr_addr, .gr_rdata, .gw_we, .gw_addr, .gw_wdata,
          .in_valid(m_in_v), .in_ready(m_in_r), .in_flit(m_in_f),
          .out_valid(m_out_v), .out_ready(m_out_r), .out_flit(m_out_f));

  always #5 clk = ~clk;

  // remote tile model and response capture
  fp64_t remote [int];
  fp64_t rsp [int];
  flit_t pend [$];
  int    due [$];
  int    cyc = 0;
  flit_t done_f;
  always @(posedge clk) begin
    cyc++;
    if (ev.fp_stall_raw)    n_raw++;
    if (ev.fp_stall_unit)   n_unit++;
    if (ev.fp_stall_reconf) n_reconf++;
    if (ev.sync_wait)       n_sync++;
    if (ev.gs_stall)        n_gs++;
    if (p_out_v && p_out_r) begin
      flit_t f, r;
      f = p_out_f;
      if (f.ptype == PK_DONE) begin n_done++; done_f = f; end
      else begin
        r = '0;
        r.dst_x = f.src_x; r.dst_y = f.src_y; r.src_x = f.dst_x; r.src_y = f.dst_y;
        if (f.dst_x != 2 || f.dst_y != 0) begin failures++; $display("FAIL request to (%0d,%0d)", f.dst_x, f.dst_y); end
        if (f.ptype == PK_PUT_REQ) begin
          remote[int'(f.addr)] = f.data; r.ptype = PK_PUT_ACK;
        end else begin
          r.ptype = PK_GET_RSP; r.addr = f.tag;
          r.data = remote.exists(int'(f.addr)) ? remote[int'(f.addr)] : '0;
        end
        pend.push_back(r); due.push_back(cyc + $urandom_range(30, 6));
      end
    end
    if (m_out_v && m_out_r) rsp[int'(m_out_f.addr)] = m_out_f.data;
  end
  always @(negedge clk) begin
    p_out_r = ($urandom_range(3, 0) != 0);
    m_out_r = 1'b1;
  end

  // drivers of the PE and memory PE inputs
  flit_t qp [$], qm [$];
  logic rp_q = 0, rm_q = 0;
  always @(posedge clk) begin rp_q <= p_in_r; rm_q <= m_in_r; end
  always @(negedge clk) begin
    if (p_in_v && rp_q) void'(qp.pop_front());
    if (m_in_v && rm_q) void'(qm.pop_front());
    if (pend.size() > 0 && due[0] <= cyc) begin qp.push_back(pend.pop_front()); void'(due.pop_front()); end
    p_in_v = qp.size() > 0; p_in_f = (qp.size() > 0) ? qp[0] : '0;
    m_in_v = qm.size() > 0; m_in_f = (qm.size() > 0) ? qm[0] : '0;
  end

  fp64_t v [16];
  logic [31:0] fp [$], ls [$];
  logic [47:0] gs [$];
  real x [16];
  fp64_t e [8];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 16; i++) begin
      v[i] = rand_fp(4);
      if (i == 8) v[i][63] = 1'b0;
      x[i] = $bitstoreal(v[i]);
      qm.push_back(host_pkt(PK_CFG_WR, 0, 0, HX, SEL_MEM, i, v[i]));
    end
    remote[50] = rand_fp(4); remote[51] = rand_fp(4);
    for (int i = 0; i < 16; i++) ls.push_back(lsi(LS_LD, i, i));
    ls.push_back(lsi(LS_SYNC, 0, 0));
    ls.push_back(lsi(LS_SYNC, 0, 0));
    for (int i = 0; i < 8; i++) ls.push_back(lsi(LS_ST, 20 + i, 100 + i));
    ls.push_back(lsi(LS_SYNC, 0, 0));
    ls.push_back(lsi(LS_HALT, 0, 0));
    fp.push_back(fpi(OP_SYNC, 0, 0, 0, 0));
    fp.push_back(fpi(OP_GEMM2, 0, 20, 0, 4));        // x0y0 + x1y1
    fp.push_back(fpi(OP_GEMM3, 3'b110, 21, 8, 12));  // x0y0 - (x1y1 - x2y2)
    fp.push_back(fpi(OP_FADD, 3'b001, 22, 1, 2));    // v1 - v2
    fp.push_back(fpi(OP_FMUL, 0, 23, 3, 9));
    fp.push_back(fpi(OP_QR, 0, 24, 0, 4));           // v7 - v3*(v0v4+(v1v5+v2v6))
    fp.push_back(fpi(OP_FDIV, 0, 25, 20, 21));
    fp.push_back(fpi(OP_FSQRT, 0, 26, 8, 0));
    fp.push_back(fpi(OP_FADD, 3'b000, 27, 25, 26));
    fp.push_back(fpi(OP_SYNC, 0, 0, 0, 0));
    fp.push_back(fpi(OP_HALT, 0, 0, 0, 0));
    gs.push_back(gsi(GS_SYNC, 0, 0, 0, 0));
    gs.push_back(gsi(GS_SYNC, 0, 0, 0, 0));
    gs.push_back(gsi(GS_SYNC, 0, 0, 0, 0));
    for (int i = 0; i < 8; i++) gs.push_back(gsi(GS_PUT, 2, 0, 100 + i, i));
    for (int i = 0; i < 8; i++) gs.push_back(gsi(GS_PUT, 2, 0, 100 + i, 10 + i));
    gs.push_back(gsi(GS_GET, 2, 0, 200, 50));
    gs.push_back(gsi(GS_GET, 2, 0, 201, 51));
    gs.push_back(gsi(GS_HALT, 0, 0, 0, 0));
    foreach (fp[k]) qp.push_back(host_pkt(PK_CFG_WR, 0, 0, HX, SEL_FP_IMEM, k, 64'(fp[k])));
    foreach (ls[k]) qp.push_back(host_pkt(PK_CFG_WR, 0, 0, HX, SEL_LS_IMEM, k, 64'(ls[k])));
    foreach (gs[k]) qp.push_back(host_pkt(PK_CFG_WR, 0, 0, HX, SEL_GS_IMEM, k, 64'(gs[k])));
    while (qm.size() != 0) @(negedge clk);
    qp.push_back(host_pkt(PK_START, 0, 0, HX, SEL_MEM, 0, '0));
    while (n_done == 0) @(negedge clk);
    for (int i = 0; i < 8; i++) qm.push_back(host_pkt(PK_CFG_RD, 0, 0, HX, SEL_MEM, 100 + i, '0));
    qm.push_back(host_pkt(PK_CFG_RD, 0, 0, HX, SEL_MEM, 200, '0));
    qm.push_back(host_pkt(PK_CFG_RD, 0, 0, HX, SEL_MEM, 201, '0));
    while (qm.size() != 0) @(negedge clk);
    repeat (10) @(negedge clk);

    e[0] = $realtobits(x[0] * x[4] + x[1] * x[5]);
    e[1] = $realtobits(x[8] * x[12] - (x[9] * x[13] - x[10] * x[14]));
    e[2] = $realtobits(x[1] - x[2]);
    e[3] = $realtobits(x[3] * x[9]);
    e[4] = $realtobits(x[7] - x[3] * (x[0] * x[4] + (x[1] * x[5] + x[2] * x[6])));
    e[5] = $realtobits($bitstoreal(e[0]) / $bitstoreal(e[1]));
    e[6] = $realtobits($sqrt(x[8]));
    e[7] = $realtobits($bitstoreal(e[5]) + $bitstoreal(e[6]));
    for (int i = 0; i < 8; i++) begin
      checks += 3;
      if (!rsp.exists(100 + i) || rsp[100 + i] !== e[i]) begin
        failures++; $display("FAIL result %0d: %h expected %h", i, rsp[100 + i], e[i]);
      end
      if (remote[i] !== e[i] || remote[10 + i] !== e[i]) begin
        failures++; $display("FAIL remote copy %0d", i);
      end
      if (dut.u_rf.regs[20 + i] !== e[i]) begin
        failures++; $display("FAIL register %0d", 20 + i);
      end
    end
    for (int i = 0; i < 2; i++) begin
      checks++;
      if (rsp[200 + i] !== remote[50 + i]) begin failures++; $display("FAIL GET %0d", i); end
    end
    checks += 3;
    if (n_done != 1 || done_f.dst_x != HX || done_f.dst_y != HY) begin
      failures++; $display("FAIL DONE count %0d to (%0d,%0d)", n_done, done_f.dst_x, done_f.dst_y);
    end
    if (n_raw == 0 || n_unit == 0 || n_sync == 0 || n_gs == 0 || n_reconf == 0) begin
      failures++; $display("FAIL events raw %0d unit %0d reconf %0d sync %0d gs %0d", n_raw, n_unit, n_reconf, n_sync, n_gs);
    end
    if (ev.done !== 1'b0 && ev.done !== 1'b1) failures++;
    $display("events: raw %0d unit %0d reconf %0d sync %0d gs %0d, done at cycle %0d",
             n_raw, n_unit, n_reconf, n_sync, n_gs, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
