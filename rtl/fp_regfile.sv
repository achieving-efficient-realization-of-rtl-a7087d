// fp_regfile: the PE register file, NREGS registers of 64 bits.
//
// The floating point sequencer reads two groups of four consecutive
// registers per instruction (X = ra..ra+3, Y = rb..rb+3, wrapping modulo
// NREGS), which feeds the eight operands of the reconfigurable data path in
// one cycle. A ninth read port serves stores of the load-store CFU. Reads are
// combinational. Two write ports: port 0 for floating point results, port 1
// for loads from local memory; if both write the same register in one cycle,
// port 0 wins. Writes take effect at the clock edge. The registers have no
// reset (programs load every register they read), so that synthesis can map
// the array to a memory rather than 16K resettable flip-flops.
// The size (256 x 64 bit) is the paper's; the port organisation is this
// design's choice.
module fp_regfile
  import kf_pkg::*;
#(
  parameter int unsigned N  = 256,
  parameter int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic [AW-1:0] ra,
  input  logic [AW-1:0] rb,
  output fp64_t         rx [4],
  output fp64_t         ry [4],
  input  logic [AW-1:0] rs_addr,
  output fp64_t         rs_data,
  input  logic          we0,
  input  logic [AW-1:0] wa0,
  input  fp64_t         wd0,
  input  logic          we1,
  input  logic [AW-1:0] wa1,
  input  fp64_t         wd1
);
  fp64_t regs [N];

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      rx[i] = regs[AW'(ra + AW'(i))];
      ry[i] = regs[AW'(rb + AW'(i))];
    end
    rs_data = regs[rs_addr];
  end

  always_ff @(posedge clk) begin
    if (we1) regs[wa1] <= wd1;
    if (we0) regs[wa0] <= wd0;
  end
endmodule
