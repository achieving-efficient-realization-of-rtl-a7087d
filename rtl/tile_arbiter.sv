// tile_arbiter: the Arbiter of a tile, sharing the router's local port
// between the compute PE and the memory PE.
//
// Towards the router it grants one of the two senders per cycle in
// round-robin order, holding the grant while the router is not ready.
// From the router it steers each packet by type: memory requests (GET_REQ,
// PUT_REQ, CFG_RD and CFG_WR to the memory) go to the memory PE, everything
// else (responses, acknowledgements, instruction memory writes, START) to the
// compute PE; the router sees the chosen receiver's ready.
// Valid/ready handshakes on every side; the arbiter itself holds no flit,
// so it adds no cycle. The paper draws an Arbiter between the router and the
// PE/CFUs without detail; steering and round-robin are this design's.
module tile_arbiter
  import kf_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // router local output -> tile
  input  logic  r_valid,
  output logic  r_ready,
  input  flit_t r_flit,
  // tile -> router local input
  output logic  t_valid,
  input  logic  t_ready,
  output flit_t t_flit,
  // compute PE
  output logic  pe_in_valid,
  input  logic  pe_in_ready,
  input  logic  pe_out_valid,
  output logic  pe_out_ready,
  input  flit_t pe_out_flit,
  // memory PE
  output logic  mem_in_valid,
  input  logic  mem_in_ready,
  input  logic  mem_out_valid,
  output logic  mem_out_ready,
  input  flit_t mem_out_flit,
  // event: both senders wanted the router port in the same cycle
  output logic  ev_conflict
);
  logic to_mem;
  logic prio_mem;     // memory PE has priority this cycle
  logic lock, lock_mem, grant_mem;

  always_comb begin
    to_mem = r_flit.ptype inside {PK_GET_REQ, PK_PUT_REQ, PK_CFG_RD} ||
             (r_flit.ptype == PK_CFG_WR && r_flit.sel == SEL_MEM);
    pe_in_valid  = r_valid && !to_mem;
    mem_in_valid = r_valid && to_mem;
    r_ready      = to_mem ? mem_in_ready : pe_in_ready;

    if (lock)                           grant_mem = lock_mem;
    else if (pe_out_valid && mem_out_valid) grant_mem = prio_mem;
    else                                grant_mem = mem_out_valid;
    t_valid       = pe_out_valid || mem_out_valid;
    t_flit        = grant_mem ? mem_out_flit : pe_out_flit;
    pe_out_ready  = t_ready && !grant_mem;
    mem_out_ready = t_ready && grant_mem;
    ev_conflict   = pe_out_valid && mem_out_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio_mem <= 1'b0; lock <= 1'b0; lock_mem <= 1'b0;
    end else begin
      lock     <= t_valid && !t_ready;
      lock_mem <= grant_mem;
      if (t_valid && t_ready) prio_mem <= !grant_mem;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      t_valid && !t_ready |=> t_valid && $stable(t_flit))
    else $error("tile_arbiter: flit changed while the router was not ready");
endmodule
