// tb_noc_router: self-checking test of the mesh router placed at (x=1,y=1).
// All five inputs send random packets to random destinations in a 4 x 4
// mesh while the outputs apply random back-pressure. Every packet must leave
// exactly once, by the port that XY routing prescribes, and packets from one
// input to one output must keep their order. The test also checks that a
// packet crosses an idle router in one cycle.
module tb_noc_router;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic  in_valid [NPORTS], in_ready [NPORTS], out_valid [NPORTS], out_ready [NPORTS];
  flit_t in_flit [NPORTS], out_flit [NPORTS];
  int checks = 0, failures = 0, sent = 0, recvd = 0;

  noc_router dut (.clk, .rst_n, .my_x(4'd1), .my_y(4'd1), .in_valid, .in_ready, .in_flit,
                  .out_valid, .out_ready, .out_flit);

  always #5 clk = ~clk;

  function automatic int xy_port(flit_t f);
    if (f.dst_x > 1) return P_EAST;
    if (f.dst_x < 1) return P_WEST;
    if (f.dst_y > 1) return P_SOUTH;
    if (f.dst_y < 1) return P_NORTH;
    return P_LOCAL;
  endfunction

  logic [63:0] expq [NPORTS][NPORTS][$];   // [in][out] ids in order
  int seq [NPORTS];
  logic gen = 1'b0, directed = 1'b0;

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NPORTS; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        int i;
        recvd++;
        checks++;
        i = int'(out_flit[o].data[63:56]);
        if (i >= NPORTS || expq[i][o].size() == 0 || expq[i][o][0] !== out_flit[o].data) begin
          failures++; $display("FAIL output %0d got packet %h", o, out_flit[o].data);
        end else void'(expq[i][o].pop_front());
      end
    end
    for (int i = 0; i < NPORTS; i++) begin
      if (in_valid[i] && in_ready[i]) begin
        expq[i][xy_port(in_flit[i])].push_back(in_flit[i].data);
        sent++;
      end
    end
  end

  always @(negedge clk) begin
    for (int i = 0; i < NPORTS; i++) begin
      if (!directed && !(in_valid[i] && !in_ready_q[i])) begin
        in_valid[i] = gen && ($urandom % 3 != 0);
        in_flit[i]  = '0;
        in_flit[i].dst_x = 4'($urandom % 4);
        in_flit[i].dst_y = 4'($urandom % 4);
        in_flit[i].data  = {8'(i), 24'd0, 32'(seq[i])};
        seq[i]++;
      end
    end
    for (int o = 0; o < NPORTS; o++) out_ready[o] = gen ? ($urandom % 3 != 0) : 1'b1;
  end
  logic in_ready_q [NPORTS];
  always @(posedge clk) for (int i = 0; i < NPORTS; i++) in_ready_q[i] <= in_ready[i];

  initial begin
    for (int i = 0; i < NPORTS; i++) begin
      in_valid[i] = 0; in_flit[i] = '0; out_ready[i] = 1; seq[i] = 0; in_ready_q[i] = 1;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    gen = 1'b1;
    repeat (5000) @(negedge clk);
    gen = 1'b0;
    repeat (50) @(negedge clk);
    checks++;
    if (sent != recvd || sent < 1000) begin
      failures++; $display("FAIL sent %0d received %0d", sent, recvd);
    end
    // latency through an idle router: in at edge k, out visible after it
    directed = 1'b1;
    @(negedge clk);
    in_valid[P_WEST] = 1'b1; in_flit[P_WEST] = '0; in_flit[P_WEST].dst_x = 4'd3;
    in_flit[P_WEST].data = {8'(P_WEST), 56'hABCDE};
    @(negedge clk);
    in_valid[P_WEST] = 1'b0;
    checks++;
    if (!(out_valid[P_EAST] && out_flit[P_EAST].data[31:0] == 32'hABCDE)) begin
      failures++; $display("FAIL packet did not cross the idle router in one cycle");
    end
    @(negedge clk);
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
