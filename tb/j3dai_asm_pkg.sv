// j3dai_asm_pkg - instruction encoders for the cluster instruction set, used
// by the testbenches to write programs (see j3dai_pkg for the formats).
package j3dai_asm_pkg;
  import j3dai_pkg::*;

  function automatic logic [63:0] i_halt();
    return {OP_HALT, 58'd0};
  endfunction

  function automatic logic [63:0] i_nop();
    return {OP_NOP, 58'd0};
  endfunction

  function automatic logic [63:0] i_setagu(int id, int base, int s0, int s1 = 0, int s2 = 0);
    logic [63:0] w = '0;
    w[63:58] = OP_SETAGU; w[57:56] = 2'(id);
    w[47:36] = 12'(base); w[35:24] = 12'(s0); w[23:12] = 12'(s1); w[11:0] = 12'(s2);
    return w;
  endfunction

  function automatic logic [63:0] i_setlp(int n0, int n1 = 1, int n2 = 1);
    logic [63:0] w = '0;
    w[63:58] = OP_SETLP; w[11:0] = 12'(n0); w[23:12] = 12'(n1); w[35:24] = 12'(n2);
    return w;
  endfunction

  function automatic logic [63:0] i_setnl(nl_mode_e m, int sh, bit sgn);
    logic [63:0] w = '0;
    w[63:58] = OP_SETNL; w[2:0] = m; w[8:4] = 5'(sh); w[12] = sgn;
    return w;
  endfunction

  function automatic logic [63:0] i_comp(pe_op_e op, ra_sel_e a_sel = RA_MEM,
      rb_sel_e b_sel = RB_MCAST_BYTE, int b_byte = 0, bit b_auto = 0, bit clr = 0,
      bit as = 0, bit bs = 0, fill_e fill = FILL_ZERO, int a_byte = 0);
    lane_ctrl_t l;
    logic [63:0] w = '0;
    l = '{op: op, a_sel: a_sel, fill: fill, a_byte: 3'(a_byte), b_sel: b_sel,
          b_byte: 3'(b_byte), a_signed: as, b_signed: bs};
    w[63:58] = OP_COMP; w[18:0] = l; w[19] = b_auto; w[20] = clr;
    return w;
  endfunction

  function automatic logic [63:0] i_mcast(int src_a, int src_b = 0, int mix = 0, bit auto_src = 0);
    logic [63:0] w = '0;
    w[63:58] = OP_MCAST; w[3:0] = 4'(src_a); w[7:4] = 4'(src_b); w[15:8] = 8'(mix); w[16] = auto_src;
    return w;
  endfunction

  function automatic logic [63:0] i_store();
    return {OP_STORE, 58'd0};
  endfunction
endpackage
