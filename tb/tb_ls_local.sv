// tb_ls_local: self-checking test of the local load/store engine with a
// behavioural one-cycle memory and register file around it. A program of
// loads, stores (one directly after a load of the same register), a SYNC that
// the testbench releases late, and HALT is run; register and memory contents,
// the single store stall, the SYNC wait and the one-instruction-per-cycle
// rate are checked.
module tb_ls_local;
  import kf_pkg::*;
  import tb_host_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic imem_we = 1'b0;
  logic [9:0] imem_addr = '0;
  logic [31:0] imem_wdata = '0;
  logic mem_en, mem_we, rf_we, at_sync, halted, ev_stall;
  logic sync_go = 1'b0;
  logic [MEM_AW-1:0] mem_addr;
  logic [REG_AW-1:0] rf_raddr, rf_waddr;
  fp64_t mem_wdata, mem_rdata, rf_rdata, rf_wdata;
  int checks = 0, failures = 0, n_stall = 0, n_sync = 0, cycle = 0;

  ls_local dut (.*);

  fp64_t mem [1024];
  fp64_t rf [256];
  always @(posedge clk) begin
    if (mem_en) begin
      if (mem_we) mem[mem_addr[9:0]] <= mem_wdata;
      mem_rdata <= mem[mem_addr[9:0]];
    end
    if (rf_we) rf[rf_waddr] <= rf_wdata;
    cycle++;
    n_stall += int'(ev_stall);
    n_sync  += int'(at_sync && !sync_go);
  end
  assign rf_rdata = rf[rf_raddr];

  always #5 clk = ~clk;

  logic [31:0] prog [$];
  fp64_t init [1024];

  initial begin
    foreach (mem[i]) begin mem[i] = {$urandom, $urandom}; init[i] = mem[i]; end
    foreach (rf[i]) rf[i] = '0;
    mem_rdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 1; i <= 8; i++) prog.push_back(lsi(LS_LD, i, 100 + i));
    prog.push_back(lsi(LS_LD, 20, 150));
    prog.push_back(lsi(LS_ST, 20, 200));          // must wait for the load of r20
    for (int i = 1; i <= 8; i++) prog.push_back(lsi(LS_ST, i, 300 + i));
    prog.push_back(lsi(LS_SYNC, 0, 0));
    prog.push_back(lsi(LS_LD, 9, 400));
    prog.push_back(lsi(LS_HALT, 0, 0));
    foreach (prog[k]) begin
      @(negedge clk); imem_we = 1; imem_addr = 10'(k); imem_wdata = prog[k];
    end
    @(negedge clk); imem_we = 0; start = 1;
    @(negedge clk); start = 0;
    while (!at_sync) @(negedge clk);
    // 18 instructions + 1 stall cycle before the SYNC
    checks++;
    if (cycle < 19) begin failures++; $display("FAIL reached SYNC too early"); end
    repeat (10) @(negedge clk);
    checks++;
    if (!at_sync || halted) begin failures++; $display("FAIL did not wait at SYNC"); end
    sync_go = 1;
    while (!halted) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int i = 1; i <= 8; i++) begin
      checks += 2;
      if (rf[i] !== init[100 + i]) begin failures++; $display("FAIL r%0d", i); end
      if (mem[300 + i] !== init[100 + i]) begin failures++; $display("FAIL mem[%0d]", 300 + i); end
    end
    checks += 3;
    if (mem[200] !== init[150]) begin failures++; $display("FAIL store after load"); end
    if (rf[9] !== init[400]) begin failures++; $display("FAIL load after SYNC"); end
    if (n_stall != 1 || n_sync < 10) begin
      failures++; $display("FAIL stalls %0d sync waits %0d", n_stall, n_sync);
    end
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
