// memory_pe: the memory PE of a tile, WORDS x 64-bit (256 KiB by default).
//
// The lower half is private to the tile's compute PE, the upper half is the
// tile's share of the global memory that every tile reaches over the NoC.
// Ports:
//  * L  -- local load/store engine: read or write any word, read data one
//          cycle later,
//  * GR -- global load/store engine reads the local word of a PUT (one-cycle
//          latency, data held until the next read), GW -- it writes GET data,
//  * N  -- network: GET_REQ/PUT_REQ address the global half (offset goff),
//          answered with GET_RSP/PUT_ACK to the sender; the host's CFG_WR
//          (sel = memory) and CFG_RD reach every word, CFG_RD is answered with
//          GET_RSP. One request is accepted per cycle while the single
//          response register is free or being emptied.
// When several ports write one word in the same cycle the network port
// wins, then GW, then L. The size and the private/global split are the
// paper's; the ports, packet handling and write priority are this design's.
module memory_pe
  import kf_pkg::*;
#(
  parameter int unsigned WORDS = 32768,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  // L port
  input  logic               l_en,
  input  logic               l_we,
  input  logic [MEM_AW-1:0]  l_addr,
  input  fp64_t              l_wdata,
  output fp64_t              l_rdata,
  // GR / GW ports
  input  logic               gr_en,
  input  logic [MEM_AW-1:0]  gr_addr,
  output fp64_t              gr_rdata,
  input  logic               gw_we,
  input  logic [MEM_AW-1:0]  gw_addr,
  input  fp64_t              gw_wdata,
  // network
  input  logic               in_valid,
  output logic               in_ready,
  input  flit_t              in_flit,
  output logic               out_valid,
  input  logic               out_ready,
  output flit_t              out_flit
);
  fp64_t mem [WORDS];

  flit_t     rsp_hdr;
  fp64_t     rsp_data;
  logic      accept, n_we, n_rd;
  logic [AW-1:0] n_addr;

  always_comb begin
    in_ready = !out_valid || out_ready;
    accept   = in_valid && in_ready;
    n_addr   = AW'(in_flit.addr);
    if (in_flit.ptype inside {PK_GET_REQ, PK_PUT_REQ})
      n_addr = AW'({1'b1, in_flit.addr[AW-2:0]});     // global half
    n_we     = accept && (in_flit.ptype == PK_PUT_REQ ||
                          (in_flit.ptype == PK_CFG_WR && in_flit.sel == SEL_MEM));
    n_rd     = accept && (in_flit.ptype == PK_GET_REQ || in_flit.ptype == PK_CFG_RD);
    out_flit = rsp_hdr;
    out_flit.data = (rsp_hdr.ptype == PK_GET_RSP) ? rsp_data : '0;
  end

  always_ff @(posedge clk) begin
    if (l_en && l_we) mem[AW'(l_addr)] <= l_wdata;
    if (gw_we)        mem[AW'(gw_addr)] <= gw_wdata;
    if (n_we)         mem[n_addr] <= in_flit.data;
    if (l_en)         l_rdata  <= mem[AW'(l_addr)];
    if (gr_en)        gr_rdata <= mem[AW'(gr_addr)];
    if (n_rd)         rsp_data <= mem[n_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      rsp_hdr   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (accept && in_flit.ptype inside {PK_GET_REQ, PK_CFG_RD, PK_PUT_REQ}) begin
        out_valid     <= 1'b1;
        rsp_hdr.ptype <= (in_flit.ptype == PK_PUT_REQ) ? PK_PUT_ACK : PK_GET_RSP;
        rsp_hdr.dst_x <= in_flit.src_x;
        rsp_hdr.dst_y <= in_flit.src_y;
        rsp_hdr.src_x <= my_x;
        rsp_hdr.src_y <= my_y;
        rsp_hdr.sel   <= SEL_MEM;
        rsp_hdr.addr  <= (in_flit.ptype == PK_CFG_RD) ? in_flit.addr : in_flit.tag;
        rsp_hdr.tag   <= in_flit.addr;
        rsp_hdr.data  <= '0;
      end
    end
  end

  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_flit))
    else $error("memory_pe: response changed while waiting for the network");
endmodule
