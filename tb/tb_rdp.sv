// tb_rdp: self-checking test of the reconfigurable data path.
// For each configuration (DOT4, GEMM3, GEMM2, QR, LU, FADD, FMUL) a burst of
// random operations is issued back to back, one per cycle; the pipeline is
// drained before the configuration changes, as the sequencer does. Every
// result is compared bit for bit with the same expression evaluated in the
// simulator's IEEE double arithmetic, in the node order of the configuration,
// and its tag and its 5-cycle latency are checked.
module tb_rdp;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  fp_op_e in_cfg = OP_NOP;
  logic [2:0] in_sgn = '0;
  fp64_t in_x [4], in_y [4];
  logic [7:0] in_tag = '0;
  logic out_valid, idle;
  logic [7:0] out_tag;
  fp64_t out_y;
  int checks = 0, failures = 0;
  int cycle = 0;

  rdp dut (.clk, .rst_n, .in_valid, .in_cfg, .in_sgn, .in_x, .in_y, .in_tag,
           .out_valid, .out_tag, .out_y, .idle);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  function automatic fp64_t rand_fp();
    fp64_t r;
    r[63]    = 1'($urandom);
    r[62:52] = 11'(1023 - 20 + ($urandom % 41));
    r[51:0]  = {20'($urandom), 32'($urandom)};
    return r;
  endfunction

  function automatic real pm(real a, real b, logic s);
    return s ? a - b : a + b;
  endfunction

  function automatic fp64_t model(fp_op_e cfg, logic [2:0] s, fp64_t x [4], fp64_t y [4]);
    real m0, m1, m2, m3, t;
    m0 = $bitstoreal(x[0]) * $bitstoreal(y[0]);
    m1 = $bitstoreal(x[1]) * $bitstoreal(y[1]);
    m2 = $bitstoreal(x[2]) * $bitstoreal(y[2]);
    m3 = $bitstoreal(x[3]) * $bitstoreal(y[3]);
    case (cfg)
      OP_DOT4:  t = pm(pm(m0, m1, s[0]), pm(m2, m3, s[1]), s[2]);
      OP_GEMM3: t = pm(m0, pm(m1, m2, s[1]), s[2]);
      OP_GEMM2: t = m0 + m1;
      OP_QR:    t = $bitstoreal(y[3]) - $bitstoreal(x[3]) * (m0 + (m1 + m2));
      OP_LU:    t = m0 - m1;
      OP_FADD:  t = pm($bitstoreal(x[0]), $bitstoreal(y[0]), s[0]);
      default:  t = m0;
    endcase
    return $realtobits(t);
  endfunction

  fp64_t exp_q [$];
  logic [7:0] tag_q [$];
  int issue_q [$];

  // The checker samples at the edge after the one that produced out_valid, so
  // a 5-cycle latency (in_valid sampled at edge k, out_valid after edge k+5)
  // reads as 6 on the cycle counter captured when the operation was driven.
  always @(posedge clk) begin
    if (out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        fp64_t e; logic [7:0] t; int c;
        e = exp_q.pop_front(); t = tag_q.pop_front(); c = issue_q.pop_front();
        if (out_y !== e || out_tag !== t || cycle - c != 6) begin
          failures++;
          $display("FAIL y=%h exp=%h tag=%0d exp=%0d lat=%0d", out_y, e, out_tag, t, cycle - c);
        end
      end
    end
  end

  fp_op_e cfgs [7] = '{OP_DOT4, OP_GEMM3, OP_GEMM2, OP_QR, OP_LU, OP_FADD, OP_FMUL};

  initial begin
    for (int i = 0; i < 4; i++) begin in_x[i] = '0; in_y[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 3; rep++) begin
      foreach (cfgs[k]) begin
        for (int n = 0; n < 200; n++) begin
          @(negedge clk);
          in_valid = 1'b1; in_cfg = cfgs[k]; in_sgn = 3'($urandom);
          in_tag = 8'($urandom);
          for (int i = 0; i < 4; i++) begin in_x[i] = rand_fp(); in_y[i] = rand_fp(); end
          exp_q.push_back(model(in_cfg, in_sgn, in_x, in_y));
          tag_q.push_back(in_tag);
          issue_q.push_back(cycle);
        end
        @(negedge clk); in_valid = 1'b0;
        while (!idle) @(negedge clk);
      end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
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
