// strela_tb_pkg: helpers the testbenches use to build PE configuration words
// (routes, FU inputs, FU outputs, clock-gate bits) and to pack them into the
// five 32-bit words of the configuration stream.
package strela_tb_pkg;
  import strela_pkg::*;

  // index k of side q among the three sides other than p (N,E,S,W order)
  function automatic int unsigned oidx(int unsigned p, int unsigned q);
    return (q < p) ? q : q - 1;
  endfunction

  // an idle PE: every output port shows "never valid"
  function automatic pe_cfg_t cfg_idle();
    pe_cfg_t c = '0;
    for (int q = 0; q < 4; q++) c.out_vsel[q] = 3'd7;
    c.fu1_vsel = 3'd7;  // vout_B2 of an idle FU: never valid
    c.fu2_vsel = 3'd7;
    return c;
  endfunction

  // route PE input p straight to PE output q
  function automatic void pass(ref pe_cfg_t c, input int unsigned p, input int unsigned q);
    c.in_mask[p][InDestO0 + oidx(p, q)] = 1'b1;
    c.out_dsel[q] = 2'(1 + oidx(q, p));
    c.out_vsel[q] = 3'(4 + oidx(q, p));
  endfunction

  function automatic void in_to_fu1(ref pe_cfg_t c, input int unsigned p);
    c.in_mask[p][InDestFu1] = 1'b1;  c.fu1_dsel = 3'(p);  c.fu1_vsel = 3'(p);
  endfunction
  function automatic void in_to_fu2(ref pe_cfg_t c, input int unsigned p);
    c.in_mask[p][InDestFu2] = 1'b1;  c.fu2_dsel = 3'(p);  c.fu2_vsel = 3'(p);
  endfunction
  function automatic void in_to_fuc(ref pe_cfg_t c, input int unsigned p);
    c.in_mask[p][InDestFuc] = 1'b1;  c.fuc_dsel = 2'(p);  c.fuc_vsel = 2'(p);
  endfunction
  function automatic void const_fu2(ref pe_cfg_t c, input logic [31:0] k);
    c.const_val = k;  c.fu2_dsel = FUIN_D_CONST;  c.fu2_vsel = FUIN_V_ONE;
  endfunction
  function automatic void const_fu1(ref pe_cfg_t c, input logic [31:0] k);
    c.const_val = k;  c.fu1_dsel = FUIN_D_CONST;  c.fu1_vsel = FUIN_V_ONE;
  endfunction
  // FU result to PE output q; vsel 0 = vout_FU, 1 = vout_FU_d, 2 = B1, 3 = B2
  function automatic void fu_to_out(ref pe_cfg_t c, input int unsigned q, input int unsigned vsel);
    c.fu_mask[FuDestN + q] = 1'b1;  c.out_dsel[q] = 2'd0;  c.out_vsel[q] = 3'(vsel);
  endfunction

  // clock-gate bits: input buffers that have destinations, FU buffers if used
  function automatic logic [5:0] cg_of(pe_cfg_t c, bit fu_used);
    logic [5:0] g;
    for (int p = 0; p < 4; p++) g[p] = |c.in_mask[p];
    g[4] = fu_used;  g[5] = fu_used;
    return g;
  endfunction

  // the five stream words of one PE: {ID, clock gates, configuration}
  function automatic logic [4:0][31:0] pack(int unsigned id, logic [5:0] cg, pe_cfg_t c);
    return {6'(id), cg, c};
  endfunction
endpackage
