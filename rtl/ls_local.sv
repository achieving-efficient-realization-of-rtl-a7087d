// ls_local: local load/store engine of the Load-Store CFU -- its own
// instruction memory and decoder, moving 64-bit words between the tile
// memory and the PE register file.
//
// Instructions (ls_instr_t in kf_pkg, 32 bits): LD reg <- mem[addr],
// ST mem[addr] <- reg, SYNC (barrier with the other two instruction
// streams), HALT. One instruction per cycle. A load reads the synchronous
// memory port in its issue cycle and writes the register one cycle later; a
// store reads the register combinationally and writes memory in its issue
// cycle. A store of the register that the load just before it is still
// writing waits one cycle (ev_stall). SYNC is reached once the last load has
// written back. The paper shows the local load/store instruction memory and
// decoder beside the local memory; the instruction set and timing are this
// design's.
module ls_local
  import kf_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  logic [31:0]        imem_wdata,
  // tile memory port (1-cycle read latency)
  output logic               mem_en,
  output logic               mem_we,
  output logic [MEM_AW-1:0]  mem_addr,
  output fp64_t              mem_wdata,
  input  fp64_t              mem_rdata,
  // register file
  output logic [REG_AW-1:0]  rf_raddr,
  input  fp64_t              rf_rdata,
  output logic               rf_we,
  output logic [REG_AW-1:0]  rf_waddr,
  output fp64_t              rf_wdata,
  // barrier
  output logic               at_sync,
  input  logic               sync_go,
  output logic               halted,
  output logic               ev_stall
);
  localparam int unsigned IAW = $clog2(IMEM_DEPTH);

  logic [31:0]    imem [IMEM_DEPTH];
  logic [IAW-1:0] pc;
  logic           running;
  ls_instr_t      ins;
  logic           ld_pend;
  logic [REG_AW-1:0] ld_reg;

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
  end

  assign ins = ls_instr_t'(imem[pc]);

  logic issue, advance;
  always_comb begin
    ev_stall  = running && ins.op == LS_ST && ld_pend && ld_reg == ins.reg_a;
    issue     = running && !ev_stall;
    at_sync   = running && ins.op == LS_SYNC && !ld_pend;
    advance   = issue && ins.op != LS_HALT && (ins.op != LS_SYNC || (at_sync && sync_go));
    mem_en    = issue && (ins.op == LS_LD || ins.op == LS_ST);
    mem_we    = issue && ins.op == LS_ST;
    mem_addr  = ins.addr;
    rf_raddr  = ins.reg_a;
    mem_wdata = rf_rdata;
    rf_we     = ld_pend;
    rf_waddr  = ld_reg;
    rf_wdata  = mem_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; running <= 1'b0; halted <= 1'b1; ld_pend <= 1'b0; ld_reg <= '0;
    end else begin
      ld_pend <= issue && ins.op == LS_LD;
      ld_reg  <= ins.reg_a;
      if (start) begin
        pc <= '0; running <= 1'b1; halted <= 1'b0;
      end else if (running) begin
        if (issue && ins.op == LS_HALT) begin running <= 1'b0; halted <= 1'b1; end
        if (advance) pc <= pc + 1'b1;
      end
    end
  end
endmodule
