// tb_ls_global: self-checking test of the global load/store engine. A
// behavioural network/remote-memory model answers its GET and PUT requests
// after random delays and applies random back-pressure. The test checks
// the packets' fields, the data that arrives in remote and local memory,
// that no more than MAX_OUT requests are ever outstanding (and that the
// limit is reached), and that SYNC and HALT wait for all answers.
module tb_ls_global;
  import kf_pkg::*;
  import tb_host_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic imem_we = 1'b0;
  logic [9:0] imem_addr = '0;
  logic [47:0] imem_wdata = '0;
  logic mem_ren, mem_we, out_valid, out_ready = 1'b1, in_valid = 1'b0, in_ready;
  logic [MEM_AW-1:0] mem_raddr, mem_waddr;
  fp64_t mem_rdata, mem_wdata;
  flit_t out_flit, in_flit = '0;
  logic at_sync, halted, ev_stall;
  logic sync_go = 1'b1;
  int checks = 0, failures = 0, n_stall = 0, outstanding = 0, max_out = 0;

  ls_global dut (.clk, .rst_n, .my_x(4'd1), .my_y(4'd2), .start, .imem_we, .imem_addr,
    .imem_wdata, .mem_ren, .mem_raddr, .mem_rdata, .mem_we, .mem_waddr, .mem_wdata,
    .out_valid, .out_ready, .out_flit, .in_valid, .in_ready, .in_flit,
    .at_sync, .sync_go, .halted, .ev_stall);

  always #5 clk = ~clk;

  fp64_t lmem [1024], lmem0 [1024];
  fp64_t rmem [int];                  // key: tile * 65536 + goff
  flit_t rspq [$];
  int    rsp_due [$];
  int    cycle = 0;

  always @(posedge clk) if (rst_n) begin
    cycle++;
    n_stall += int'(ev_stall);
    if (mem_ren) mem_rdata <= lmem[mem_raddr[9:0]];
    if (mem_we) lmem[mem_waddr[9:0]] <= mem_wdata;
    if (in_valid && in_ready) outstanding--;
    if (out_valid && out_ready) begin
      flit_t f, r;
      int key;
      outstanding++;
      if (outstanding > max_out) max_out = outstanding;
      f = out_flit;
      checks++;
      if (f.src_x != 4'd1 || f.src_y != 4'd2) begin failures++; $display("FAIL source"); end
      key = (int'(f.dst_y) * 16 + int'(f.dst_x)) * 65536 + int'(f.addr);
      r = '0;
      r.dst_x = f.src_x; r.dst_y = f.src_y; r.src_x = f.dst_x; r.src_y = f.dst_y;
      r.addr = f.tag;
      if (f.ptype == PK_PUT_REQ) begin
        rmem[key] = f.data; r.ptype = PK_PUT_ACK;
      end else begin
        r.ptype = PK_GET_RSP; r.data = rmem.exists(key) ? rmem[key] : 64'hDEAD;
      end
      rspq.push_back(r);
      rsp_due.push_back(cycle + 5 + $urandom % 20);
    end
  end

  always @(negedge clk) begin
    if (in_valid && in_ready) begin void'(rspq.pop_front()); void'(rsp_due.pop_front()); end
    in_valid = rspq.size() > 0 && rsp_due[0] <= cycle;
    in_flit  = (rspq.size() > 0) ? rspq[0] : '0;
    out_ready = ($urandom % 4) != 0;
  end

  logic [47:0] prog [$];

  initial begin
    foreach (lmem[i]) begin lmem[i] = {$urandom, $urandom}; lmem0[i] = lmem[i]; end
    mem_rdata = '0;
    for (int i = 0; i < 12; i++) rmem[(0 * 16 + 3) * 65536 + 80 + i] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 12; i++) prog.push_back(gsi(GS_PUT, 2, 1, 10 + i, 50 + i));
    for (int i = 0; i < 12; i++) prog.push_back(gsi(GS_GET, 3, 0, 100 + i, 80 + i));
    prog.push_back(gsi(GS_SYNC, 0, 0, 0, 0));
    prog.push_back(gsi(GS_PUT, 2, 1, 200, 7));
    prog.push_back(gsi(GS_HALT, 0, 0, 0, 0));
    foreach (prog[k]) begin
      @(negedge clk); imem_we = 1; imem_addr = 10'(k); imem_wdata = prog[k];
    end
    @(negedge clk); imem_we = 0; start = 1;
    @(negedge clk); start = 0;
    while (!halted) begin
      @(negedge clk);
      if (at_sync) begin
        checks++;
        if (outstanding != 0) begin failures++; $display("FAIL SYNC with requests outstanding"); end
      end
    end
    checks++;
    if (outstanding != 0) begin failures++; $display("FAIL HALT with requests outstanding"); end
    for (int i = 0; i < 12; i++) begin
      checks += 2;
      if (rmem[(1 * 16 + 2) * 65536 + 50 + i] !== lmem0[10 + i]) begin failures++; $display("FAIL PUT %0d", i); end
      if (lmem[100 + i] !== rmem[(0 * 16 + 3) * 65536 + 80 + i]) begin failures++; $display("FAIL GET %0d", i); end
    end
    checks += 2;
    if (rmem[(1 * 16 + 2) * 65536 + 7] !== lmem0[200]) begin failures++; $display("FAIL last PUT"); end
    if (max_out != 8 || n_stall == 0) begin
      failures++; $display("FAIL max outstanding %0d stalls %0d", max_out, n_stall);
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
