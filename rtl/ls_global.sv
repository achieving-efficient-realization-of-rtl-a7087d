// ls_global: global load/store engine of the Load-Store CFU -- its own
// instruction memory and decoder, moving words between this tile's memory
// and the global half of any tile's memory over the NoC.
//
// Instructions (gs_instr_t in kf_pkg, 48 bits):
//   GET laddr <- tile(ty,tx).global[goff]  sends a GET_REQ packet; the
//        GET_RSP that comes back is written to local memory at laddr,
//   PUT tile(ty,tx).global[goff] <- laddr  reads the local word (one cycle)
//        and sends it in a PUT_REQ packet, acknowledged by PUT_ACK,
//   SYNC waits until no request is outstanding, then for the barrier,
//   HALT, reached once every outstanding request is answered.
// Up to MAX_OUT requests may be outstanding (ev_stall when the limit or a
// busy network holds an instruction back). Responses are always accepted.
// Packets use valid/ready handshakes: a flit is transferred in a cycle
// where both are high, and out_flit holds while out_valid waits for ready.
// The paper names the global load/store instruction memory and decoder and
// the global memory; the instruction set, packets and flow control are this
// design's.
module ls_global
  import kf_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned MAX_OUT    = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic               start,
  input  logic               imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  logic [47:0]        imem_wdata,
  // tile memory: read port (1-cycle latency) and write port
  output logic               mem_ren,
  output logic [MEM_AW-1:0]  mem_raddr,
  input  fp64_t              mem_rdata,
  output logic               mem_we,
  output logic [MEM_AW-1:0]  mem_waddr,
  output fp64_t              mem_wdata,
  // NoC
  output logic               out_valid,
  input  logic               out_ready,
  output flit_t              out_flit,
  input  logic               in_valid,
  output logic               in_ready,
  input  flit_t              in_flit,
  // barrier
  output logic               at_sync,
  input  logic               sync_go,
  output logic               halted,
  output logic               ev_stall
);
  localparam int unsigned IAW = $clog2(IMEM_DEPTH);
  localparam int unsigned OW  = $clog2(MAX_OUT + 1);

  logic [47:0]    imem [IMEM_DEPTH];
  logic [IAW-1:0] pc;
  logic           running;
  gs_instr_t      ins;
  logic [OW-1:0]  outstanding;
  logic           put_rd;          // PUT: local word being read this cycle

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
  end

  assign ins = gs_instr_t'(imem[pc]);

  logic is_req, full, sent, rsp_in, advance;
  always_comb begin
    is_req   = running && (ins.op == GS_GET || ins.op == GS_PUT);
    full     = outstanding == OW'(MAX_OUT);
    // a PUT first reads its local word (put_rd), then sends
    mem_ren   = running && ins.op == GS_PUT && !put_rd && !full;
    mem_raddr = ins.laddr;
    out_valid = running && !full && (ins.op == GS_GET || (ins.op == GS_PUT && put_rd));
    out_flit  = '{ptype: (ins.op == GS_PUT) ? PK_PUT_REQ : PK_GET_REQ,
                  dst_x: ins.tx, dst_y: ins.ty, src_x: my_x, src_y: my_y,
                  sel: SEL_MEM, addr: MEM_AW'(ins.goff), tag: ins.laddr,
                  data: mem_rdata};
    sent     = out_valid && out_ready;
    ev_stall = is_req && !sent && !mem_ren;
    in_ready = 1'b1;
    rsp_in   = in_valid && (in_flit.ptype == PK_GET_RSP || in_flit.ptype == PK_PUT_ACK);
    mem_we    = in_valid && in_flit.ptype == PK_GET_RSP;
    mem_waddr = in_flit.addr;
    mem_wdata = in_flit.data;
    at_sync  = running && ins.op == GS_SYNC && outstanding == '0;
    advance  = running && ((is_req && sent) || ins.op == GS_NOP ||
                           (ins.op == GS_SYNC && at_sync && sync_go));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; running <= 1'b0; halted <= 1'b1; outstanding <= '0; put_rd <= 1'b0;
    end else begin
      outstanding <= outstanding + OW'(sent) - OW'(rsp_in);
      if (start) begin
        pc <= '0; running <= 1'b1; halted <= 1'b0; put_rd <= 1'b0;
      end else if (running) begin
        if (mem_ren) put_rd <= 1'b1;
        else if (sent) put_rd <= 1'b0;
        if (ins.op == GS_HALT && outstanding == '0) begin running <= 1'b0; halted <= 1'b1; end
        if (advance) pc <= pc + 1'b1;
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_flit))
    else $error("ls_global: request changed while waiting for the network");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
      rsp_in |-> outstanding != '0 || sent)
    else $error("ls_global: response without an outstanding request");
endmodule
