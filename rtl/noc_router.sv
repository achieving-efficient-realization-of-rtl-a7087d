// noc_router: packet-switched router of the REDEFINE tile mesh.
//
// Five ports (local, north, east, south, west; numbering in kf_pkg). Every
// packet is a single flit (flit_t). Each input has a FIFO of FIFO_DEPTH
// flits; the flit at its head is routed dimension-ordered (XY): first along
// the row towards dst_x, then along the column towards dst_y (row 0 is the
// north edge), and to the local port on arrival. Each output grants one input
// per cycle in round-robin order and keeps its grant while the downstream
// side is not ready, so a presented flit never changes before it is taken.
// Handshake: a flit moves when valid and ready are both high. in_ready
// depends only on FIFO occupancy and out_valid only on FIFO heads, so chained
// routers form no combinational path. A flit moves one router per cycle when
// nothing blocks it.
// The paper states a packet-switched NoC between tiles; the mesh topology,
// XY routing, single-flit packets and FIFO depth are this design's choices.
module noc_router
  import kf_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic               in_valid [NPORTS],
  output logic               in_ready [NPORTS],
  input  flit_t              in_flit  [NPORTS],
  output logic               out_valid [NPORTS],
  input  logic               out_ready [NPORTS],
  output flit_t              out_flit  [NPORTS]
);
  localparam int unsigned PW = $clog2(FIFO_DEPTH);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  flit_t           fifo  [NPORTS][FIFO_DEPTH];
  logic [PW-1:0]   rd_p  [NPORTS];
  logic [PW-1:0]   wr_p  [NPORTS];
  logic [CW-1:0]   count [NPORTS];
  logic [2:0]      route [NPORTS];
  logic            head_v [NPORTS];
  logic            pop   [NPORTS];

  // route of each FIFO head
  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      flit_t h;
      h         = fifo[i][rd_p[i]];
      head_v[i] = count[i] != '0;
      if (h.dst_x > my_x)      route[i] = 3'(P_EAST);
      else if (h.dst_x < my_x) route[i] = 3'(P_WEST);
      else if (h.dst_y > my_y) route[i] = 3'(P_SOUTH);
      else if (h.dst_y < my_y) route[i] = 3'(P_NORTH);
      else                     route[i] = 3'(P_LOCAL);
    end
  end

  // output arbitration
  logic [2:0] rr    [NPORTS];   // input with the highest priority
  logic       lock  [NPORTS];
  logic [2:0] lsel  [NPORTS];
  logic [2:0] gsel  [NPORTS];

  // round-robin pick: first requesting input at or after `start`
  function automatic logic [3:0] rr_pick(logic [NPORTS-1:0] req, logic [2:0] start);
    logic [3:0] r;
    r = '0;
    for (int k = NPORTS - 1; k >= 0; k--) begin
      logic [2:0] idx;
      idx = 3'((int'(start) + k) % NPORTS);
      if (req[idx]) r = {1'b1, idx};
    end
    return r;
  endfunction

  logic [NPORTS-1:0] req [NPORTS];
  logic [3:0]        pick [NPORTS];

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      for (int i = 0; i < NPORTS; i++) req[o][i] = head_v[i] && route[i] == 3'(o);
      pick[o]      = rr_pick(req[o], rr[o]);
      out_valid[o] = lock[o] || pick[o][3];
      gsel[o]      = lock[o] ? lsel[o] : pick[o][2:0];
      out_flit[o]  = fifo[gsel[o]][rd_p[gsel[o]]];
    end
  end

  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      pop[i] = 1'b0;
      for (int o = 0; o < NPORTS; o++)
        if (out_valid[o] && out_ready[o] && gsel[o] == 3'(i)) pop[i] = 1'b1;
      in_ready[i] = count[i] != CW'(FIFO_DEPTH);
    end
  end

  logic [NPORTS-1:0] push;
  always_comb
    for (int i = 0; i < NPORTS; i++) push[i] = in_valid[i] && in_ready[i];

  // FIFO storage has no reset: only entries below count are ever read
  always_ff @(posedge clk)
    for (int i = 0; i < NPORTS; i++)
      if (push[i]) fifo[i][wr_p[i]] <= in_flit[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPORTS; i++) begin
        rd_p[i] <= '0; wr_p[i] <= '0; count[i] <= '0;
        rr[i] <= '0; lock[i] <= 1'b0; lsel[i] <= '0;
      end
    end else begin
      for (int i = 0; i < NPORTS; i++) begin
        if (push[i]) wr_p[i] <= (wr_p[i] == PW'(FIFO_DEPTH - 1)) ? '0 : wr_p[i] + 1'b1;
        if (pop[i]) rd_p[i] <= (rd_p[i] == PW'(FIFO_DEPTH - 1)) ? '0 : rd_p[i] + 1'b1;
        count[i] <= count[i] + CW'(push[i]) - CW'(pop[i]);
      end
      for (int o = 0; o < NPORTS; o++) begin
        lock[o] <= out_valid[o] && !out_ready[o];
        lsel[o] <= gsel[o];
        if (out_valid[o] && out_ready[o])
          rr[o] <= (gsel[o] == 3'(NPORTS - 1)) ? '0 : gsel[o] + 3'd1;
      end
    end
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
        out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_flit[o]))
      else $error("noc_router: output %0d changed while stalled", o);
  end
endmodule
