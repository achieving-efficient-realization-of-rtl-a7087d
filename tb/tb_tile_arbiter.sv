// tb_tile_arbiter: self-checking test of the tile arbiter. The compute PE
// and the memory PE both send random packets towards the router, which
// applies random back-pressure; every packet must reach the router once, in
// order per sender, and both senders must be served when they compete. From
// the router side random packets must be steered by type to the memory PE
// (memory requests) or to the compute PE (everything else).
module tb_tile_arbiter;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic r_valid = 0, r_ready, t_valid, t_ready = 1;
  flit_t r_flit = '0, t_flit, pe_out_flit = '0, mem_out_flit = '0;
  logic pe_in_valid, pe_in_ready = 1, pe_out_valid = 0, pe_out_ready;
  logic mem_in_valid, mem_in_ready = 1, mem_out_valid = 0, mem_out_ready, ev_conflict;
  int checks = 0, failures = 0, n_conf = 0, n_pe = 0, n_mem = 0;
  int pe_seq = 0, mem_seq = 0, pe_exp = 0, mem_exp = 0;
  logic gen = 1'b0;

  tile_arbiter dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    n_conf += int'(ev_conflict);
    if (t_valid && t_ready) begin
      checks++;
      if (t_flit.data[63]) begin
        if (t_flit.data[31:0] !== 32'(mem_exp)) begin failures++; $display("FAIL memory PE order"); end
        mem_exp++; n_mem++;
      end else begin
        if (t_flit.data[31:0] !== 32'(pe_exp)) begin failures++; $display("FAIL PE order"); end
        pe_exp++; n_pe++;
      end
    end
    if (r_valid && r_ready) begin
      logic m;
      m = r_flit.ptype inside {PK_GET_REQ, PK_PUT_REQ, PK_CFG_RD} ||
          (r_flit.ptype == PK_CFG_WR && r_flit.sel == SEL_MEM);
      checks++;
      if (m != mem_in_valid || m == pe_in_valid) begin
        failures++; $display("FAIL packet type %0d sel %0d steered wrongly", r_flit.ptype, r_flit.sel);
      end
    end
  end

  always @(negedge clk) begin
    if (gen) begin
      if (!(pe_out_valid && !pe_ready_q)) begin
        pe_out_valid = 1'($urandom);
        pe_out_flit = '0; pe_out_flit.data = {1'b0, 31'd0, 32'(pe_seq)};
        if (pe_out_valid) pe_seq++;
      end
      if (!(mem_out_valid && !mem_ready_q)) begin
        mem_out_valid = 1'($urandom);
        mem_out_flit = '0; mem_out_flit.data = {1'b1, 31'd0, 32'(mem_seq)};
        if (mem_out_valid) mem_seq++;
      end
      t_ready = ($urandom % 3) != 0;
      if (!(r_valid && !r_ready_q)) begin
        r_valid = 1'($urandom);
        r_flit  = '0;
        r_flit.ptype = pkt_type_e'($urandom);
        r_flit.sel   = cfg_sel_e'($urandom);
      end
      pe_in_ready  = 1'($urandom);
      mem_in_ready = 1'($urandom);
    end else begin
      if (!(pe_out_valid && !pe_ready_q)) pe_out_valid = 0;
      if (!(mem_out_valid && !mem_ready_q)) mem_out_valid = 0;
      if (!(r_valid && !r_ready_q)) r_valid = 0;
      t_ready = 1; pe_in_ready = 1; mem_in_ready = 1;
    end
  end
  logic pe_ready_q = 0, mem_ready_q = 0, r_ready_q = 0;
  always @(posedge clk) begin
    pe_ready_q <= pe_out_ready; mem_ready_q <= mem_out_ready; r_ready_q <= r_ready;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    gen = 1'b1;
    repeat (3000) @(negedge clk);
    gen = 1'b0;
    repeat (20) @(negedge clk);
    checks++;
    if (pe_exp != pe_seq || mem_exp != mem_seq || n_conf == 0 || n_pe < 300 || n_mem < 300) begin
      failures++;
      $display("FAIL pe %0d/%0d mem %0d/%0d conflicts %0d", pe_exp, pe_seq, mem_exp, mem_seq, n_conf);
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
