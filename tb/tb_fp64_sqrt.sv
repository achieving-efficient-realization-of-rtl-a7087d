// tb_fp64_sqrt: self-checking test of the iterative binary64 square root.
// Random normal operands go through the square root and are compared bit
// for bit with the simulator's IEEE double $sqrt; the start-to-done latency (58 cycles for
// normal operands) and a set of special operands are checked too.
module tb_fp64_sqrt;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  fp64_t a, b, y;  // b unused by the DUT, printed only
  logic busy, done;
  int checks = 0, failures = 0;

  fp64_sqrt dut (.clk, .rst_n, .start, .a, .busy, .done, .y);

  always #5 clk = ~clk;

  function automatic fp64_t rand_fp(int unsigned erange);
    fp64_t r;
    r[63]    = 1'($urandom);
    r[62:52] = 11'(1023 - erange + ($urandom % (2 * erange + 1)));
    r[51:0]  = {20'($urandom), 32'($urandom)};
    return r;
  endfunction

  task automatic run(fp64_t exp_y, int exp_lat, string what);
    int lat;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL %s: a=%h b=%h y=%h expected %h", what, a, b, y, exp_y);
    end
    if (exp_lat > 0) begin
      checks++;
      if (lat != exp_lat) begin
        failures++;
        $display("FAIL %s latency %0d expected %0d", what, lat, exp_lat);
      end
    end
  endtask

  initial begin
    a = '0; b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1500; i++) begin
      a = rand_fp(300); a[63] = 1'b0;
      run($realtobits($sqrt($bitstoreal(a))), (i < 5) ? 58 : 0, "random");
    end
    a = 64'h4010_0000_0000_0000;  run(64'h4000_0000_0000_0000, 58, "sqrt4");
    a = 64'h4022_0000_0000_0000;  run(64'h4008_0000_0000_0000, 58, "sqrt9");
    a = 64'hC000_0000_0000_0000;  run(FP64_QNAN, 2, "sqrt-2");
    a = 64'h8000_0000_0000_0000;  run(64'h8000_0000_0000_0000, 2, "sqrt-0");
    a = 64'h7FF0_0000_0000_0000;  run(a, 2, "sqrtinf");
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
