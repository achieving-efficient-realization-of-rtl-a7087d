// tb_fp64_mul: self-checking test of the binary64 multiplier node.
// Random normal operands (exponents kept near 1.0 so that no result is
// subnormal) are compared bit for bit with the simulator's own IEEE double
// product; a few special operands (zero, inf, NaN) are checked by rule.
module tb_fp64_mul;
  import kf_pkg::*;
  logic clk = 1'b0;
  fp64_t a, b, y;
  int checks = 0, failures = 0;

  fp64_mul dut (.a(a), .b(b), .y(y));

  always #5 clk = ~clk;

  function automatic fp64_t rand_fp(int unsigned erange);
    fp64_t r;
    r[63]    = 1'($urandom);
    r[62:52] = 11'(1023 - erange + ($urandom % (2 * erange + 1)));
    r[51:0]  = {20'($urandom), 32'($urandom)};
    return r;
  endfunction

  task automatic check(fp64_t exp_y, string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL %s: a=%h b=%h y=%h expected %h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    for (int i = 0; i < 5000; i++) begin
      a = rand_fp(200); b = rand_fp(200);
      check($realtobits($bitstoreal(a) * $bitstoreal(b)), "random");
    end
    a = 64'h3FF0_0000_0000_0000; b = 64'h0;                   check(64'h0, "x*0");
    a = 64'hBFF0_0000_0000_0000; b = 64'h7FF0_0000_0000_0000; check(64'hFFF0_0000_0000_0000, "-1*inf");
    a = 64'h0;                   b = 64'h7FF0_0000_0000_0000; check(FP64_QNAN, "0*inf");
    a = 64'h7FE0_0000_0000_0000; b = 64'h4010_0000_0000_0000; check(64'h7FF0_0000_0000_0000, "overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
