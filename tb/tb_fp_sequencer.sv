// tb_fp_sequencer: self-checking test of the floating point sequencer with
// its register file. Registers are preloaded through the second write port,
// a program using every configuration of the RDP plus FDIV, FSQRT, SYNC and
// HALT is written to the instruction memory and run. The results are
// compared with IEEE double arithmetic done in the testbench; the test also
// checks that independent RDP operations issue one per cycle and that each
// stall kind (register hazard, RDP reconfiguration, long unit) occurred.
// A second program chains DOT4s so that a result is read back at every X
// and every Y operand position, which only the hazard check can order.
module tb_fp_sequencer;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic imem_we = 1'b0;
  logic [9:0] imem_addr = '0;
  logic [31:0] imem_wdata = '0;
  logic [7:0] rf_ra, rf_rb, rf_wa, rs_addr = '0, wa1 = '0;
  fp64_t rf_rx [4], rf_ry [4], rf_wd, rs_data, wd1 = '0;
  logic rf_we, we1 = 1'b0;
  logic at_sync, halted, ev_issue, ev_stall_raw, ev_stall_reconf, ev_stall_unit;
  logic sync_go = 1'b1;
  int checks = 0, failures = 0;
  int n_raw = 0, n_reconf = 0, n_unit = 0, cycle = 0;
  int issue_cycles [$];

  fp_sequencer dut (.clk, .rst_n, .start, .imem_we, .imem_addr, .imem_wdata,
    .rf_ra, .rf_rb, .rf_rx, .rf_ry, .rf_we, .rf_wa, .rf_wd,
    .at_sync, .sync_go, .halted, .ev_issue, .ev_stall_raw, .ev_stall_reconf, .ev_stall_unit);
  fp_regfile u_rf (.clk, .ra(rf_ra), .rb(rf_rb), .rx(rf_rx), .ry(rf_ry),
    .rs_addr, .rs_data, .we0(rf_we), .wa0(rf_wa), .wd0(rf_wd), .we1, .wa1, .wd1);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle++;
    n_raw += int'(ev_stall_raw); n_reconf += int'(ev_stall_reconf); n_unit += int'(ev_stall_unit);
    if (ev_issue) issue_cycles.push_back(cycle);
  end

  real r [256];

  function automatic fp64_t rand_fp();
    fp64_t v;
    v[63] = 1'($urandom); v[62:52] = 11'(1013 + ($urandom % 21)); v[51:0] = {20'($urandom), 32'($urandom)};
    return v;
  endfunction

  function automatic logic [31:0] I(fp_op_e op, logic [2:0] s, int rd, int ra, int rb);
    fp_instr_t i;
    i = '{op: op, sgn: s, rsvd: 1'b0, rd: 8'(rd), ra: 8'(ra), rb: 8'(rb)};
    return 32'(i);
  endfunction

  function automatic real pm(real a, real b, logic s);
    return s ? a - b : a + b;
  endfunction

  logic [31:0] prog [$];

  task automatic expect_reg(int idx, real v, string what);
    rs_addr = 8'(idx); #1;
    checks++;
    if (rs_data !== $realtobits(v)) begin
      failures++; $display("FAIL %s r%0d=%h expected %h", what, idx, rs_data, $realtobits(v));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 17; i++) begin
      @(negedge clk);
      we1 = 1'b1; wa1 = 8'(i); wd1 = rand_fp();
      if (i == 16) wd1[63] = 1'b0;
      r[i] = $bitstoreal(wd1);
    end
    @(negedge clk); we1 = 1'b0;
    prog = '{
      I(OP_DOT4,  3'b101, 40, 0, 4),   // 4 independent DOT4 back to back
      I(OP_DOT4,  3'b000, 41, 4, 8),
      I(OP_DOT4,  3'b010, 42, 8, 12),
      I(OP_DOT4,  3'b111, 43, 12, 0),
      I(OP_QR,    3'b000, 21, 8, 12),  // reconfiguration DOT4 -> QR
      I(OP_LU,    3'b000, 22, 0, 4),
      I(OP_GEMM3, 3'b110, 23, 1, 5),
      I(OP_FADD,  3'b000, 24, 40, 21), // register hazard on r21
      I(OP_FDIV,  3'b000, 25, 24, 22),
      I(OP_FSQRT, 3'b000, 26, 16, 0),
      I(OP_FMUL,  3'b000, 27, 25, 26),
      I(OP_GEMM2, 3'b000, 28, 2, 6),
      I(OP_FADD,  3'b001, 29, 28, 41),
      I(OP_SYNC,  3'b000, 0, 0, 0),
      I(OP_HALT,  3'b000, 0, 0, 0)};
    foreach (prog[k]) begin
      @(negedge clk); imem_we = 1'b1; imem_addr = 10'(k); imem_wdata = prog[k];
    end
    @(negedge clk); imem_we = 1'b0; start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!halted) @(negedge clk);

    r[40] = pm(pm(r[0]*r[4], r[1]*r[5], 1), pm(r[2]*r[6], r[3]*r[7], 0), 1);
    r[41] = (r[4]*r[8] + r[5]*r[9]) + (r[6]*r[10] + r[7]*r[11]);
    r[42] = (r[8]*r[12] + r[9]*r[13]) + (r[10]*r[14] - r[11]*r[15]);
    r[43] = (r[12]*r[0] - r[13]*r[1]) - (r[14]*r[2] - r[15]*r[3]);
    r[21] = r[15] - r[11] * (r[8]*r[12] + (r[9]*r[13] + r[10]*r[14]));
    r[22] = r[0]*r[4] - r[1]*r[5];
    r[23] = pm(r[1]*r[5], pm(r[2]*r[6], r[3]*r[7], 1), 1);
    r[24] = r[40] + r[21];
    r[25] = r[24] / r[22];
    r[26] = $sqrt(r[16]);
    r[27] = r[25] * r[26];
    r[28] = r[2]*r[6] + r[3]*r[7];
    r[29] = r[28] - r[41];
    for (int i = 40; i < 44; i++) expect_reg(i, r[i], "dot4");
    for (int i = 21; i < 30; i++) expect_reg(i, r[i], "op");
    checks++;
    if (issue_cycles.size() < 4 || issue_cycles[3] - issue_cycles[0] != 3) begin
      failures++; $display("FAIL independent DOT4s did not issue one per cycle");
    end
    checks++;
    if (n_raw == 0 || n_reconf == 0 || n_unit == 0) begin
      failures++; $display("FAIL stalls raw=%0d reconf=%0d unit=%0d", n_raw, n_reconf, n_unit);
    end
    // Phase 2: a DOT4 result feeds the next DOT4 at each X and each Y operand
    // position; both have the same configuration, so only the register
    // hazard check can hold the consumer back.
    for (int i = 64; i < 160; i++) begin
      @(negedge clk);
      we1 = 1'b1; wa1 = 8'(i); wd1 = rand_fp(); r[i] = $bitstoreal(wd1);
    end
    @(negedge clk); we1 = 1'b0;
    prog.delete();
    for (int p = 0; p < 4; p++) begin
      prog.push_back(I(OP_DOT4, 3'b000, 64 + 8*p + p, 0, 4));
      prog.push_back(I(OP_DOT4, 3'b000, 200 + p, 64 + 8*p, 4));
      prog.push_back(I(OP_DOT4, 3'b000, 128 + 8*p + p, 8, 12));
      prog.push_back(I(OP_DOT4, 3'b000, 210 + p, 0, 128 + 8*p));
    end
    prog.push_back(I(OP_HALT, 3'b000, 0, 0, 0));
    foreach (prog[k]) begin
      @(negedge clk); imem_we = 1'b1; imem_addr = 10'(k); imem_wdata = prog[k];
    end
    @(negedge clk); imem_we = 1'b0; start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!halted) @(negedge clk);
    for (int p = 0; p < 4; p++) begin
      int a, b;
      a = 64 + 8*p; b = 128 + 8*p;
      r[a + p] = (r[0]*r[4] + r[1]*r[5]) + (r[2]*r[6] + r[3]*r[7]);
      r[200 + p] = (r[a]*r[4] + r[a+1]*r[5]) + (r[a+2]*r[6] + r[a+3]*r[7]);
      r[b + p] = (r[8]*r[12] + r[9]*r[13]) + (r[10]*r[14] + r[11]*r[15]);
      r[210 + p] = (r[0]*r[b] + r[1]*r[b+1]) + (r[2]*r[b+2] + r[3]*r[b+3]);
      expect_reg(200 + p, r[200 + p], "X-position hazard");
      expect_reg(210 + p, r[210 + p], "Y-position hazard");
    end
    $display("stalls: raw=%0d reconf=%0d unit=%0d, run took %0d cycles", n_raw, n_reconf, n_unit, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
