// tile: one REDEFINE tile in the configuration where the whole array
// computes -- a router, the arbiter, the compute PE and the memory PE.
//
// The router's local port goes through the arbiter to the compute PE
// (instruction memory writes, START, responses to its global requests) and
// to the memory PE (requests to the global half, host accesses). The compute
// PE also reaches the memory PE directly through its L, GR and GW ports
// (private accesses that do not use the network). The four mesh links are
// the arrays dir_* indexed 0 = north, 1 = east, 2 = south, 3 = west.
// Tile composition follows the paper (router + arbiter + PE, with a memory PE
// attached to the router beside the compute PE); link format is this
// design's.
module tile
  import kf_pkg::*;
#(
  parameter int unsigned MEM_WORDS_P = MEM_WORDS,
  parameter int unsigned IMEM_DEPTH  = 1024,
  parameter int unsigned FIFO_DEPTH  = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic               dir_in_valid  [4],
  output logic               dir_in_ready  [4],
  input  flit_t              dir_in_flit   [4],
  output logic               dir_out_valid [4],
  input  logic               dir_out_ready [4],
  output flit_t              dir_out_flit  [4],
  output pe_ev_t             ev,
  output logic               ev_arb_conflict
);
  logic  r_in_valid [NPORTS], r_in_ready [NPORTS], r_out_valid [NPORTS], r_out_ready [NPORTS];
  flit_t r_in_flit [NPORTS], r_out_flit [NPORTS];

  logic  loc_out_valid, loc_out_ready, loc_in_valid, loc_in_ready;
  flit_t loc_out_flit, loc_in_flit;

  always_comb begin
    r_in_valid[P_LOCAL]  = loc_in_valid;
    r_in_flit[P_LOCAL]   = loc_in_flit;
    loc_in_ready         = r_in_ready[P_LOCAL];
    loc_out_valid        = r_out_valid[P_LOCAL];
    loc_out_flit         = r_out_flit[P_LOCAL];
    r_out_ready[P_LOCAL] = loc_out_ready;
    for (int d = 0; d < 4; d++) begin
      r_in_valid[d + 1]  = dir_in_valid[d];
      r_in_flit[d + 1]   = dir_in_flit[d];
      dir_in_ready[d]    = r_in_ready[d + 1];
      dir_out_valid[d]   = r_out_valid[d + 1];
      dir_out_flit[d]    = r_out_flit[d + 1];
      r_out_ready[d + 1] = dir_out_ready[d];
    end
  end

  noc_router #(.FIFO_DEPTH(FIFO_DEPTH)) u_router (
    .clk, .rst_n, .my_x, .my_y,
    .in_valid(r_in_valid), .in_ready(r_in_ready), .in_flit(r_in_flit),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_flit(r_out_flit));

  logic  pe_in_valid, pe_in_ready, pe_out_valid, pe_out_ready;
  logic  mem_in_valid, mem_in_ready, mem_out_valid, mem_out_ready;
  flit_t pe_out_flit, mem_out_flit;

  tile_arbiter u_arb (
    .clk, .rst_n,
    .r_valid(loc_out_valid), .r_ready(loc_out_ready), .r_flit(loc_out_flit),
    .t_valid(loc_in_valid), .t_ready(loc_in_ready), .t_flit(loc_in_flit),
    .pe_in_valid, .pe_in_ready, .pe_out_valid, .pe_out_ready, .pe_out_flit,
    .mem_in_valid, .mem_in_ready, .mem_out_valid, .mem_out_ready, .mem_out_flit,
    .ev_conflict(ev_arb_conflict));

  logic              l_en, l_we, gr_en, gw_we;
  logic [MEM_AW-1:0] l_addr, gr_addr, gw_addr;
  fp64_t             l_wdata, l_rdata, gr_rdata, gw_wdata;

  pe #(.IMEM_DEPTH(IMEM_DEPTH)) u_pe (
    .clk, .rst_n, .my_x, .my_y,
    .in_valid(pe_in_valid), .in_ready(pe_in_ready), .in_flit(loc_out_flit),
    .out_valid(pe_out_valid), .out_ready(pe_out_ready), .out_flit(pe_out_flit),
    .l_en, .l_we, .l_addr, .l_wdata, .l_rdata,
    .gr_en, .gr_addr, .gr_rdata, .gw_we, .gw_addr, .gw_wdata, .ev);

  memory_pe #(.WORDS(MEM_WORDS_P)) u_mem (
    .clk, .rst_n, .my_x, .my_y,
    .l_en, .l_we, .l_addr, .l_wdata, .l_rdata,
    .gr_en, .gr_addr, .gr_rdata, .gw_we, .gw_addr, .gw_wdata,
    .in_valid(mem_in_valid), .in_ready(mem_in_ready), .in_flit(loc_out_flit),
    .out_valid(mem_out_valid), .out_ready(mem_out_ready), .out_flit(mem_out_flit));
endmodule
