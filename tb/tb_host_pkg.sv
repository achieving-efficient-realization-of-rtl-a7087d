// tb_host_pkg: testbench helpers that stand in for the simulation
// environment -- builders for instructions of the three instruction streams
// and for the host's packets (CFG_WR, CFG_RD, START).
package tb_host_pkg;
  import kf_pkg::*;

  // host coordinates: one column east of the array, row 0
  function automatic flit_t host_pkt(pkt_type_e t, int dx, int dy, int hx,
                                     cfg_sel_e sel, int addr, fp64_t data);
    flit_t f;
    f = '0;
    f.ptype = t;
    f.dst_x = COORD_W'(dx); f.dst_y = COORD_W'(dy);
    f.src_x = COORD_W'(hx); f.src_y = '0;
    f.sel   = sel;
    f.addr  = MEM_AW'(addr);
    f.tag   = MEM_AW'(addr);
    f.data  = data;
    return f;
  endfunction

  function automatic logic [31:0] fpi(fp_op_e op, logic [2:0] s, int rd, int ra, int rb);
    fp_instr_t i;
    i = '{op: op, sgn: s, rsvd: 1'b0, rd: REG_AW'(rd), ra: REG_AW'(ra), rb: REG_AW'(rb)};
    return 32'(i);
  endfunction

  function automatic logic [31:0] lsi(ls_op_e op, int r, int addr);
    ls_instr_t i;
    i = '{op: op, reg_a: REG_AW'(r), rsvd: '0, addr: MEM_AW'(addr)};
    return 32'(i);
  endfunction

  function automatic logic [47:0] gsi(gs_op_e op, int tx, int ty, int laddr, int goff);
    gs_instr_t i;
    i = '{op: op, ty: COORD_W'(ty), tx: COORD_W'(tx), rsvd: '0,
          laddr: MEM_AW'(laddr), goff: GOFF_AW'(goff)};
    return 48'(i);
  endfunction

  function automatic fp64_t rand_fp(int unsigned erange);
    fp64_t v;
    v[63]    = 1'($urandom);
    v[62:52] = 11'(1023 - erange + ($urandom % (2 * erange + 1)));
    v[51:0]  = {20'($urandom), 32'($urandom)};
    return v;
  endfunction
endpackage
