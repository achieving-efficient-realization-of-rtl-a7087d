// tb_fp64_div: self-checking test of the iterative binary64 divider.
// Random normal operands are divided and compared bit for bit with the
// simulator's IEEE double quotient; the start-to-done latency (58 cycles for
// normal operands) and a set of special operands are checked too.
module tb_fp64_div;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  fp64_t a, b, y;
  logic busy, done;
  int checks = 0, failures = 0;

  fp64_div dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .y);

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
      a = rand_fp(200); b = rand_fp(200);
      run($realtobits($bitstoreal(a) / $bitstoreal(b)), (i < 5) ? 58 : 0, "random");
    end
    a = 64'h3FF0_0000_0000_0000; b = 64'h0;  run(64'h7FF0_0000_0000_0000, 2, "x/0");
    a = 64'h0; b = 64'h0;                    run(FP64_QNAN, 0, "0/0");
    a = 64'h0; b = 64'hC000_0000_0000_0000;  run(64'h8000_0000_0000_0000, 0, "0/-2");
    a = 64'h4008_0000_0000_0000; b = a;      run(64'h3FF0_0000_0000_0000, 58, "x/x");
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
