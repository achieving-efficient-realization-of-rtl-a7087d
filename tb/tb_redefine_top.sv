// tb_redefine_top: end-to-end test of the full 4 x 4 array at its default
// sizes, the testbench acting as the simulation environment attached to the
// east side of the last column.
//
// Every tile receives its own random 4 x 4 compound matrix M = [A B; -C D]
// (2 x 2 blocks) and three programs:
//  * local load/store: load M into r0..r15, SYNC, SYNC, store the results to
//    the tile's global half, SYNC, HALT (plus a load/store pair that makes a
//    store wait for a load),
//  * floating point: SYNC, Faddeev elimination of the first two columns with
//    FDIV/FMUL/FADD (the lower right block becomes the Schur complement
//    D + C A^-1 B), then one QR, LU, GEMM3, DOT4 and FSQRT operation on the
//    result, SYNC, HALT,
//  * global load/store: SYNC x3, PUT the nine results into the global half of
//    the east neighbour (wrapping), GET one word from the tile south-east,
//    HALT.
// The host then reads everything back with CFG_RD and compares it bit for bit
// with the same operations done in IEEE double arithmetic here. It also
// counts how often each mechanism occurred (register-hazard, reconfiguration
// and long-unit stalls, load/store stall, SYNC waits, arbiter conflicts,
// network back-pressure at the host port, DONE packets) and fails if one
// never did.
module tb_redefine_top;
  import kf_pkg::*;
  import tb_host_pkg::*;

  localparam int R = 4, C = 4;
  localparam int G = MEM_WORDS / 2;    // first word of the global half
  localparam int NRES = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  logic   host_in_valid [R], host_in_ready [R], host_out_valid [R], host_out_ready [R];
  flit_t  host_in_flit [R], host_out_flit [R];
  pe_ev_t ev [R][C];
  logic   ev_arb_conflict [R][C];

  redefine_top dut (.clk, .rst_n, .host_in_valid, .host_in_ready, .host_in_flit,
                    .host_out_valid, .host_out_ready, .host_out_flit, .ev, .ev_arb_conflict);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_raw = 0, n_reconf = 0, n_unit = 0, n_ls = 0, n_sync = 0, n_arb = 0, n_bp = 0;
  int n_done = 0, n_issue = 0, cycle = 0;

  // ------------------------------------------------------------ host side
  fp64_t rsp [int];          // key: (y*C + x) * 65536 + addr

  always @(posedge clk) begin
    cycle++;
    for (int r = 0; r < R; r++) begin
      if (host_in_valid[r] && !host_in_ready[r]) n_bp++;
      for (int c = 0; c < C; c++) begin
        n_raw    += int'(ev[r][c].fp_stall_raw);
        n_reconf += int'(ev[r][c].fp_stall_reconf);
        n_unit   += int'(ev[r][c].fp_stall_unit);
        n_ls     += int'(ev[r][c].ls_stall);
        n_sync   += int'(ev[r][c].sync_wait);
        n_issue  += int'(ev[r][c].fp_issue);
        n_arb    += int'(ev_arb_conflict[r][c]);
      end
      if (host_out_valid[r]) begin
        flit_t f;
        f = host_out_flit[r];
        if (f.ptype == PK_DONE) n_done++;
        else if (f.ptype == PK_GET_RSP)
          rsp[(int'(f.src_y) * C + int'(f.src_x)) * 65536 + int'(f.addr)] = f.data;
      end
    end
  end

  // all packets leave from the host into the row of their destination
  flit_t q [R][$];
  always @(negedge clk) begin
    for (int r = 0; r < R; r++) begin
      if (host_in_valid[r] && host_in_ready_q[r]) void'(q[r].pop_front());
      host_in_valid[r] = q[r].size() > 0;
      host_in_flit[r]  = (q[r].size() > 0) ? q[r][0] : '0;
    end
  end
  logic host_in_ready_q [R];
  always @(posedge clk) for (int r = 0; r < R; r++) host_in_ready_q[r] <= host_in_ready[r];

  task automatic send(flit_t f);
    q[int'(f.dst_y)].push_back(f);
  endtask

  task automatic wait_sent();
    int n;
    do begin
      @(negedge clk);
      n = 0;
      for (int r = 0; r < R; r++) n += q[r].size();
    end while (n != 0);
  endtask

  // ------------------------------------------------------------ programs
  real   rv   [R][C][64];        // model register file
  fp64_t m0   [R][C][16];
  fp64_t res  [R][C][NRES];
  fp64_t g200 [R][C];
  fp64_t w20  [R][C];

  function automatic real pm(real a, real b, logic s);
    return s ? a - b : a + b;
  endfunction

  task automatic build_tile(int y, int x);
    logic [31:0] fp [$];
    logic [31:0] ls [$];
    logic [47:0] gs [$];
    int rr [NRES];
    // data
    for (int i = 0; i < 16; i++) begin
      m0[y][x][i] = rand_fp(3);
      send(host_pkt(PK_CFG_WR, x, y, C, SEL_MEM, i, m0[y][x][i]));
    end
    w20[y][x]  = rand_fp(3);
    g200[y][x] = rand_fp(3);
    send(host_pkt(PK_CFG_WR, x, y, C, SEL_MEM, 20, w20[y][x]));
    send(host_pkt(PK_CFG_WR, x, y, C, SEL_MEM, G + 200, g200[y][x]));
    // local load/store stream
    for (int i = 0; i < 16; i++) ls.push_back(lsi(LS_LD, i, i));
    ls.push_back(lsi(LS_LD, 50, 20));
    ls.push_back(lsi(LS_ST, 50, 21));       // waits for the load of r50
    ls.push_back(lsi(LS_SYNC, 0, 0));
    ls.push_back(lsi(LS_SYNC, 0, 0));
    rr = '{10, 11, 14, 15, 40, 41, 42, 43, 44};
    for (int k = 0; k < NRES; k++) ls.push_back(lsi(LS_ST, rr[k], G + k));
    ls.push_back(lsi(LS_SYNC, 0, 0));
    ls.push_back(lsi(LS_HALT, 0, 0));
    // floating point stream: Faddeev elimination, then the macro operations
    for (int i = 0; i < 64; i++) rv[y][x][i] = 0.0;
    for (int i = 0; i < 16; i++) rv[y][x][i] = $bitstoreal(m0[y][x][i]);
    fp.push_back(fpi(OP_SYNC, 0, 0, 0, 0));
    for (int k = 0; k < 2; k++) begin
      for (int i = k + 1; i < 4; i++) begin
        fp.push_back(fpi(OP_FDIV, 0, 32, 4*i + k, 4*k + k));
        rv[y][x][32] = rv[y][x][4*i + k] / rv[y][x][4*k + k];
        for (int j = k + 1; j < 4; j++) begin
          fp.push_back(fpi(OP_FMUL, 0, 33, 32, 4*k + j));
          rv[y][x][33] = rv[y][x][32] * rv[y][x][4*k + j];
          fp.push_back(fpi(OP_FADD, 3'b001, 4*i + j, 4*i + j, 33));
          rv[y][x][4*i + j] = rv[y][x][4*i + j] - rv[y][x][33];
        end
      end
    end
    fp.push_back(fpi(OP_DOT4, 3'b010, 40, 10, 0));
    rv[y][x][40] = pm(rv[y][x][10]*rv[y][x][0] + rv[y][x][11]*rv[y][x][1],
                      rv[y][x][12]*rv[y][x][2] - rv[y][x][13]*rv[y][x][3], 0);
    fp.push_back(fpi(OP_QR, 3'b000, 41, 8, 12));
    rv[y][x][41] = rv[y][x][15] - rv[y][x][11] *
                   (rv[y][x][8]*rv[y][x][12] + (rv[y][x][9]*rv[y][x][13] + rv[y][x][10]*rv[y][x][14]));
    fp.push_back(fpi(OP_LU, 3'b000, 42, 10, 14));
    rv[y][x][42] = rv[y][x][10]*rv[y][x][14] - rv[y][x][11]*rv[y][x][15];
    fp.push_back(fpi(OP_GEMM3, 3'b100, 43, 0, 4));
    rv[y][x][43] = rv[y][x][0]*rv[y][x][4] - (rv[y][x][1]*rv[y][x][5] + rv[y][x][2]*rv[y][x][6]);
    fp.push_back(fpi(OP_FMUL, 0, 45, 10, 10));
    rv[y][x][45] = rv[y][x][10] * rv[y][x][10];
    fp.push_back(fpi(OP_FSQRT, 0, 44, 45, 0));
    rv[y][x][44] = $sqrt(rv[y][x][45]);
    fp.push_back(fpi(OP_SYNC, 0, 0, 0, 0));
    fp.push_back(fpi(OP_HALT, 0, 0, 0, 0));
    for (int k = 0; k < NRES; k++) res[y][x][k] = $realtobits(rv[y][x][rr[k]]);
    // global load/store stream
    gs.push_back(gsi(GS_SYNC, 0, 0, 0, 0));
    gs.push_back(gsi(GS_SYNC, 0, 0, 0, 0));
    gs.push_back(gsi(GS_SYNC, 0, 0, 0, 0));
    for (int k = 0; k < NRES; k++) gs.push_back(gsi(GS_PUT, (x + 1) % C, y, G + k, 64 + k));
    gs.push_back(gsi(GS_GET, (x + 1) % C, (y + 1) % R, 300, 200));
    gs.push_back(gsi(GS_HALT, 0, 0, 0, 0));
    foreach (fp[k]) send(host_pkt(PK_CFG_WR, x, y, C, SEL_FP_IMEM, k, 64'(fp[k])));
    foreach (ls[k]) send(host_pkt(PK_CFG_WR, x, y, C, SEL_LS_IMEM, k, 64'(ls[k])));
    foreach (gs[k]) send(host_pkt(PK_CFG_WR, x, y, C, SEL_GS_IMEM, k, 64'(gs[k])));
  endtask

  task automatic expect_word(int y, int x, int addr, fp64_t v, string what);
    int key;
    key = (y * C + x) * 65536 + addr;
    checks++;
    if (!rsp.exists(key)) begin
      failures++; $display("FAIL %s tile(%0d,%0d) addr %0d: no response", what, y, x, addr);
    end else if (rsp[key] !== v) begin
      failures++;
      $display("FAIL %s tile(%0d,%0d) addr %0d: %h expected %h", what, y, x, addr, rsp[key], v);
    end
  endtask

  initial begin
    for (int r = 0; r < R; r++) begin
      host_in_valid[r] = 1'b0; host_in_flit[r] = '0; host_out_ready[r] = 1'b1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int y = 0; y < R; y++) for (int x = 0; x < C; x++) build_tile(y, x);
    wait_sent();
    for (int y = 0; y < R; y++) for (int x = 0; x < C; x++)
      send(host_pkt(PK_START, x, y, C, SEL_MEM, 0, '0));
    begin
      int t0;
      t0 = cycle;
      while (n_done < R * C && cycle - t0 < 50000) @(negedge clk);
      $display("all tiles done after %0d cycles", cycle - t0);
    end
    checks++;
    if (n_done != R * C) begin failures++; $display("FAIL only %0d DONE packets", n_done); end
    for (int y = 0; y < R; y++) for (int x = 0; x < C; x++) begin
      for (int k = 0; k < NRES; k++) begin
        send(host_pkt(PK_CFG_RD, x, y, C, SEL_MEM, G + k, '0));
        send(host_pkt(PK_CFG_RD, x, y, C, SEL_MEM, G + 64 + k, '0));
      end
      send(host_pkt(PK_CFG_RD, x, y, C, SEL_MEM, 300, '0));
      send(host_pkt(PK_CFG_RD, x, y, C, SEL_MEM, 21, '0));
    end
    wait_sent();
    repeat (100) @(negedge clk);
    for (int y = 0; y < R; y++) for (int x = 0; x < C; x++) begin
      for (int k = 0; k < NRES; k++) begin
        expect_word(y, x, G + k, res[y][x][k], "result");
        expect_word(y, x, G + 64 + k, res[y][(x + C - 1) % C][k], "PUT from west neighbour");
      end
      expect_word(y, x, 300, g200[(y + 1) % R][(x + 1) % C], "GET");
      expect_word(y, x, 21, w20[y][x], "LD/ST copy");
    end
    $display("events: issue=%0d raw=%0d reconf=%0d unit=%0d ls=%0d sync=%0d arb=%0d backpressure=%0d done=%0d",
             n_issue, n_raw, n_reconf, n_unit, n_ls, n_sync, n_arb, n_bp, n_done);
    checks++;
    if (n_raw == 0 || n_reconf == 0 || n_unit == 0 || n_ls == 0 || n_sync == 0 ||
        n_arb == 0 || n_bp == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
