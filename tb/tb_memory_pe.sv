// tb_memory_pe: self-checking test of the tile memory. Random traffic on
// the L, GR and GW ports and random network requests (GET_REQ, PUT_REQ,
// CFG_WR, CFG_RD) with random back-pressure on the response side are checked
// against a reference model: read data one cycle after the request, GET/PUT
// confined to the global half, responses addressed to the sender with the
// right type, address and data.
module tb_memory_pe;
  import kf_pkg::*;
  localparam int W = 1024;        // reduced size for the test
  logic clk = 1'b0, rst_n = 1'b0;
  logic l_en = 0, l_we = 0, gr_en = 0, gw_we = 0;
  logic [MEM_AW-1:0] l_addr = '0, gr_addr = '0, gw_addr = '0;
  fp64_t l_wdata = '0, l_rdata, gr_rdata, gw_wdata = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  flit_t in_flit = '0, out_flit;
  int checks = 0, failures = 0;

  memory_pe #(.WORDS(W)) dut (.clk, .rst_n, .my_x(4'd2), .my_y(4'd1),
    .l_en, .l_we, .l_addr, .l_wdata, .l_rdata, .gr_en, .gr_addr, .gr_rdata,
    .gw_we, .gw_addr, .gw_wdata, .in_valid, .in_ready, .in_flit,
    .out_valid, .out_ready, .out_flit);

  always #5 clk = ~clk;

  fp64_t ref_m [W];
  flit_t exp_q [$];
  fp64_t l_exp, gr_exp;
  logic  l_chk = 0, gr_chk = 0;

  // transfers are sampled at the clock edge, as the memory sees them
  always @(posedge clk) if (rst_n) begin
      if (out_valid && out_ready) begin
        flit_t e;
        checks++;
        e = exp_q.pop_front();
        if (out_flit !== e) begin failures++; $display("FAIL response %p expected %p", out_flit, e); end
      end
      if (in_valid && in_ready) begin
        flit_t f, e;
        int a;
        f = in_flit;
        a = (f.ptype inside {PK_GET_REQ, PK_PUT_REQ}) ? W/2 + int'(f.addr) % (W/2) : int'(f.addr) % W;
        e = '0;
        e.dst_x = f.src_x; e.dst_y = f.src_y; e.src_x = 4'd2; e.src_y = 4'd1; e.sel = SEL_MEM;
        e.tag = f.addr;
        if (f.ptype == PK_GET_REQ || f.ptype == PK_CFG_RD) begin
          e.ptype = PK_GET_RSP; e.data = ref_m[a];
          e.addr  = (f.ptype == PK_CFG_RD) ? f.addr : f.tag;
          exp_q.push_back(e);
        end else if (f.ptype == PK_PUT_REQ) begin
          e.ptype = PK_PUT_ACK; e.addr = f.tag; e.data = '0;
          exp_q.push_back(e);
          ref_m[a] = f.data;
        end else begin
          ref_m[a] = f.data;
        end
      end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // initialise the whole memory through the L port
    for (int i = 0; i < W; i++) begin
      @(negedge clk); l_en = 1; l_we = 1; l_addr = MEM_AW'(i); l_wdata = {$urandom, $urandom};
      ref_m[i] = l_wdata;
    end
    @(negedge clk); l_en = 0; l_we = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // check the reads issued in the previous cycle
      if (l_chk)  begin checks++; if (l_rdata !== l_exp)  begin failures++; $display("FAIL L read"); end end
      if (gr_chk) begin checks++; if (gr_rdata !== gr_exp) begin failures++; $display("FAIL GR read"); end end
      // new stimulus (local ports avoid the words the network touches)
      l_chk = 0; gr_chk = 0;
      l_en = 1'($urandom); l_we = 1'($urandom); l_addr = MEM_AW'($urandom % (W/2));
      l_wdata = {$urandom, $urandom};
      gr_en = 1'($urandom); gr_addr = MEM_AW'($urandom % (W/2));
      gw_we = 1'($urandom); gw_addr = MEM_AW'($urandom % (W/2)); gw_wdata = {$urandom, $urandom};
      if (gw_we && l_en && l_we && gw_addr == l_addr) gw_we = 0;
      if (l_en && !l_we) begin l_chk = 1; l_exp = (gw_we && gw_addr == l_addr) ? ref_m[l_addr] : ref_m[l_addr]; end
      if (gr_en) begin gr_chk = 1; gr_exp = ref_m[gr_addr]; end
      if (l_en && l_we) ref_m[l_addr] = l_wdata;
      if (gw_we) ref_m[gw_addr] = gw_wdata;
      if (!(in_valid && !in_ready)) begin
        in_valid = 1'($urandom);
        in_flit  = '0;
        in_flit.ptype = pkt_type_e'($urandom % 6);
        if (in_flit.ptype == PK_GET_RSP) in_flit.ptype = PK_GET_REQ;
        if (in_flit.ptype == PK_PUT_ACK) in_flit.ptype = PK_PUT_REQ;
        in_flit.src_x = 4'($urandom); in_flit.src_y = 4'($urandom);
        in_flit.sel   = SEL_MEM;
        in_flit.addr  = (in_flit.ptype inside {PK_GET_REQ, PK_PUT_REQ}) ?
                        MEM_AW'($urandom % (W/2)) : MEM_AW'(W/2 + $urandom % (W/2));
        in_flit.tag   = MEM_AW'($urandom);
        in_flit.data  = {$urandom, $urandom};
      end
      out_ready = ($urandom % 4) != 0;
    end
    checks++;
    if (exp_q.size() > 1) begin failures++; $display("FAIL %0d responses missing", exp_q.size()); end
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
