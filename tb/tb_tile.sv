// tb_tile: self-checking test of one tile at (x=1, y=1) driven through its
// mesh links. The testbench acts as the host on the east link: it loads a
// 2 x 2 linear-system problem and three programs, starts the tile and waits
// for DONE. The programs load operands, compute with LU, DOT4, FDIV and FSQRT,
// store the results and PUT/GET words to and from the tile's own global
// memory (the packets loop back through the router). Results read back with
// CFG_RD are compared with IEEE double arithmetic. Packets passing
// through (west -> east and east -> south) must leave by the right links.
module tb_tile;
  import kf_pkg::*;
  import tb_host_pkg::*;
  localparam int G = MEM_WORDS / 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic  din_v [4], din_r [4], dout_v [4], dout_r [4];
  flit_t din_f [4], dout_f [4];
  pe_ev_t ev;
  logic ev_arb_conflict;
  int checks = 0, failures = 0, n_done = 0, n_pass_e = 0, n_pass_s = 0;

  tile dut (.clk, .rst_n, .my_x(4'd1), .my_y(4'd1),
            .dir_in_valid(din_v), .dir_in_ready(din_r), .dir_in_flit(din_f),
            .dir_out_valid(dout_v), .dir_out_ready(dout_r), .dir_out_flit(dout_f),
            .ev, .ev_arb_conflict);

  always #5 clk = ~clk;

  fp64_t rsp [int];
  always @(posedge clk) if (rst_n) begin
    if (dout_v[1]) begin
      if (dout_f[1].ptype == PK_DONE) n_done++;
      else if (dout_f[1].ptype == PK_GET_RSP) rsp[int'(dout_f[1].addr)] = dout_f[1].data;
      else if (dout_f[1].data == 64'h5A5A) n_pass_e++;
    end
    if (dout_v[2] && dout_f[2].data == 64'hA5A5) n_pass_s++;
    for (int d = 0; d < 4; d++)
      if (d != 1 && d != 2 && dout_v[d]) begin failures++; $display("FAIL packet left by link %0d", d); end
  end

  // drivers of the east (1) and west (3) inputs
  flit_t qe [$], qw [$];
  logic re_q = 0, rw_q = 0;
  always @(posedge clk) begin re_q <= din_r[1]; rw_q <= din_r[3]; end
  always @(negedge clk) begin
    if (din_v[1] && re_q) void'(qe.pop_front());
    if (din_v[3] && rw_q) void'(qw.pop_front());
    din_v[1] = qe.size() > 0; din_f[1] = (qe.size() > 0) ? qe[0] : '0;
    din_v[3] = qw.size() > 0; din_f[3] = (qw.size() > 0) ? qw[0] : '0;
  end

  task automatic host(flit_t f); qe.push_back(f); endtask
  task automatic wait_sent(); do @(negedge clk); while (qe.size() + qw.size() != 0); endtask

  fp64_t v [8];
  logic [31:0] fp [$], ls [$];
  logic [47:0] gs [$];

  initial begin
    for (int d = 0; d < 4; d++) begin din_v[d] = 0; din_f[d] = '0; dout_r[d] = 1; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 8; i++) begin
      v[i] = rand_fp(3);
      if (i == 6) v[i][63] = 1'b0;
      host(host_pkt(PK_CFG_WR, 1, 1, 2, SEL_MEM, i, v[i]));
    end
    host(host_pkt(PK_CFG_WR, 1, 1, 2, SEL_MEM, G + 40, 64'h1234_5678_9ABC_DEF0));
    for (int i = 0; i < 8; i++) ls.push_back(lsi(LS_LD, i, i));
    ls.push_back(lsi(LS_SYNC, 0, 0));
    ls.push_back(lsi(LS_SYNC, 0, 0));
    for (int i = 0; i < 4; i++) ls.push_back(lsi(LS_ST, 10 + i, 20 + i));
    ls.push_back(lsi(LS_SYNC, 0, 0));
    ls.push_back(lsi(LS_HALT, 0, 0));
    fp.push_back(fpi(OP_SYNC, 0, 0, 0, 0));
    fp.push_back(fpi(OP_LU, 0, 10, 0, 2));       // v0*v2 - v1*v3
    fp.push_back(fpi(OP_DOT4, 3'b001, 11, 0, 4));
    fp.push_back(fpi(OP_FDIV, 0, 12, 10, 11));
    fp.push_back(fpi(OP_FSQRT, 0, 13, 6, 0));
    fp.push_back(fpi(OP_SYNC, 0, 0, 0, 0));
    fp.push_back(fpi(OP_HALT, 0, 0, 0, 0));
    gs.push_back(gsi(GS_SYNC, 0, 0, 0, 0));
    gs.push_back(gsi(GS_SYNC, 0, 0, 0, 0));
    gs.push_back(gsi(GS_SYNC, 0, 0, 0, 0));
    for (int i = 0; i < 4; i++) gs.push_back(gsi(GS_PUT, 1, 1, 20 + i, 10 + i));
    gs.push_back(gsi(GS_GET, 1, 1, 30, 40));
    gs.push_back(gsi(GS_HALT, 0, 0, 0, 0));
    foreach (fp[k]) host(host_pkt(PK_CFG_WR, 1, 1, 2, SEL_FP_IMEM, k, 64'(fp[k])));
    foreach (ls[k]) host(host_pkt(PK_CFG_WR, 1, 1, 2, SEL_LS_IMEM, k, 64'(ls[k])));
    foreach (gs[k]) host(host_pkt(PK_CFG_WR, 1, 1, 2, SEL_GS_IMEM, k, 64'(gs[k])));
    host(host_pkt(PK_START, 1, 1, 2, SEL_MEM, 0, '0));
    // traffic through the tile
    for (int i = 0; i < 5; i++) begin
      qw.push_back(host_pkt(PK_PUT_REQ, 2, 1, 0, SEL_MEM, 0, 64'h5A5A));
      qe.push_back(host_pkt(PK_PUT_REQ, 1, 3, 2, SEL_MEM, 0, 64'hA5A5));
    end
    wait_sent();
    while (n_done == 0) @(negedge clk);
    for (int i = 0; i < 4; i++) host(host_pkt(PK_CFG_RD, 1, 1, 2, SEL_MEM, G + 10 + i, '0));
    host(host_pkt(PK_CFG_RD, 1, 1, 2, SEL_MEM, 30, '0));
    wait_sent();
    repeat (20) @(negedge clk);
    begin
      real r10, r11;
      fp64_t e [5];
      r10 = $bitstoreal(v[0]) * $bitstoreal(v[2]) - $bitstoreal(v[1]) * $bitstoreal(v[3]);
      r11 = ($bitstoreal(v[0]) * $bitstoreal(v[4]) - $bitstoreal(v[1]) * $bitstoreal(v[5])) +
            ($bitstoreal(v[2]) * $bitstoreal(v[6]) + $bitstoreal(v[3]) * $bitstoreal(v[7]));
      e = '{$realtobits(r10), $realtobits(r11), $realtobits(r10 / r11),
            $realtobits($sqrt($bitstoreal(v[6]))), 64'h1234_5678_9ABC_DEF0};
      for (int i = 0; i < 5; i++) begin
        int a;
        a = (i < 4) ? G + 10 + i : 30;
        checks++;
        if (!rsp.exists(a) || rsp[a] !== e[i]) begin
          failures++; $display("FAIL word %0d: %h expected %h", a, rsp.exists(a) ? rsp[a] : 0, e[i]);
        end
      end
    end
    checks += 2;
    if (n_done != 1) begin failures++; $display("FAIL %0d DONE packets", n_done); end
    if (n_pass_e != 5 || n_pass_s != 5) begin
      failures++; $display("FAIL pass-through east %0d south %0d", n_pass_e, n_pass_s);
    end
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
