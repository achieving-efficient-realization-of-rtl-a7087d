// tb_fp64_addsub: self-checking test of the binary64 adder/subtractor node.
// Random normal operands (exponents kept near 1.0 so that no result is
// subnormal) are compared bit for bit with the simulator's own IEEE double
// sum or difference; a few special operands (zero, inf, NaN) are checked by rule.
module tb_fp64_addsub;
  import kf_pkg::*;
  logic clk = 1'b0;
  fp64_t a, b, y;
  logic  sub;
  int checks = 0, failures = 0;

  fp64_addsub dut (.a(a), .b(b), .sub(sub), .y(y));

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
    for (int i = 0; i < 8000; i++) begin
      a = rand_fp(i < 4000 ? 60 : 3); b = rand_fp(i < 4000 ? 60 : 3);
      if (i % 5 == 0) b[62:52] = a[62:52];            // cancellation cases
      sub = 1'($urandom);
      check($realtobits(sub ? $bitstoreal(a) - $bitstoreal(b)
                            : $bitstoreal(a) + $bitstoreal(b)), "random");
    end
    sub = 1'b1; a = 64'h4000_0000_0000_0000; b = a;            check(64'h0, "x-x");
    sub = 1'b0; a = 64'h0; b = 64'hC008_0000_0000_0000;        check(b, "0+b");
    sub = 1'b1; a = 64'h0; b = 64'hC008_0000_0000_0000;        check(64'h4008_0000_0000_0000, "0-b");
    sub = 1'b1; a = 64'h7FF0_0000_0000_0000; b = a;            check(FP64_QNAN, "inf-inf");
    sub = 1'b0; a = 64'h7FEF_FFFF_FFFF_FFFF; b = a;            check(64'h7FF0_0000_0000_0000, "overflow");
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
