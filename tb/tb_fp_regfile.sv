// tb_fp_regfile: self-checking test of the PE register file against a
// reference array: random writes on both ports (including same-address
// collisions, where port 0 must win) and reads of all nine ports, including
// the wrap-around of the four-register operand groups.
module tb_fp_regfile;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] ra, rb, rs_addr, wa0, wa1;
  fp64_t rx [4], ry [4], rs_data, wd0, wd1;
  logic we0, we1;
  fp64_t ref_m [256];
  int checks = 0, failures = 0;

  fp_regfile dut (.*);

  always #5 clk = ~clk;

  initial begin
    we0 = 0; we1 = 0; ra = 0; rb = 0; rs_addr = 0; wa0 = 0; wa1 = 0; wd0 = 0; wd1 = 0;
    foreach (ref_m[i]) ref_m[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // the registers have no reset: write every one of them first
    for (int i = 0; i < NREGS; i++) begin
      @(negedge clk);
      we0 = 1'b1; wa0 = 8'(i); wd0 = '0;
      @(posedge clk);
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we0 = 1'($urandom); we1 = 1'($urandom);
      wa0 = 8'($urandom); wa1 = (n % 7 == 0) ? wa0 : 8'($urandom);
      wd0 = {$urandom, $urandom}; wd1 = {$urandom, $urandom};
      ra = 8'($urandom); rb = (n % 11 == 0) ? 8'd254 : 8'($urandom); rs_addr = 8'($urandom);
      #1;
      checks++;
      for (int i = 0; i < 4; i++) begin
        if (rx[i] !== ref_m[8'(ra + i)] || ry[i] !== ref_m[8'(rb + i)]) begin
          failures++; $display("FAIL read group at ra=%0d rb=%0d i=%0d", ra, rb, i);
        end
      end
      if (rs_data !== ref_m[rs_addr]) begin failures++; $display("FAIL rs read"); end
      @(posedge clk);
      if (we1) ref_m[wa1] = wd1;
      if (we0) ref_m[wa0] = wd0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
