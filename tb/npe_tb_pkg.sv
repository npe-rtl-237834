// npe_tb_pkg: helpers shared by the NPE testbenches.
//
// Builders for micro-instruction fields and ICU instructions (a tiny
// assembler), and reference models written independently of the RTL: the
// piecewise-linear evaluation and the saturation rules.
//
// The reference PWL evaluation follows the published interpolation method;
// the square-root table reproduces the three-segment example of sqrt(x) on
// [0, 2) in Q8; the encodings and microprograms are this design's own.
package npe_tb_pkg;
  import npe_pkg::*;

  function automatic uvcu_t vop(vop_e op, ew_e ew, int dst, int s1, int s2,
                                bit scal = 0, int sreg = 0, int imm = 0);
    uvcu_t v;
    v.op = op; v.ew = ew; v.dst = 5'(dst); v.src1 = 5'(s1); v.src2 = 5'(s2);
    v.scal = scal; v.sreg = 5'(sreg); v.imm = 6'(imm);
    return v;
  endfunction

  function automatic uscu_t sop(sop_e op, ew_e ew, int dst, int s1, int s2,
                                bit use_imm = 0, longint imm = 0);
    uscu_t s;
    s.op = op; s.ew = ew; s.dst = 5'(dst); s.src1 = 5'(s1); s.src2 = 5'(s2);
    s.use_imm = use_imm; s.imm = 32'(imm);
    return s;
  endfunction

  function automatic ulsu_t lop(lop_e op, int vreg, int base, int offs = 0,
                                int stride = 0, int idx = 0);
    ulsu_t l;
    l.op = op; l.vreg = 5'(vreg); l.base = 5'(base); l.offs = 16'(offs);
    l.stride = 5'(stride); l.idx = 5'(idx);
    return l;
  endfunction

  function automatic uctrl_t ctl(cop_e op, int cnt = 0, int sreg = 0, int target = 0);
    uctrl_t c;
    c.op = op; c.cnt = 1'(cnt); c.sreg = 5'(sreg); c.target = 9'(target);
    return c;
  endfunction

  function automatic ubundle_t bnop();
    ubundle_t b;
    b = '0;
    return b;
  endfunction

  function automatic icu_instr_t ins_mru(mru_dst_e dst, int ext_addr, int count,
                                        int dst_addr, int dst_bank = 0);
    icu_instr_t i;
    mru_cmd_t   c;
    i = '0; i.op = I_MRU;
    c.dst = dst; c.ext_addr = 32'(ext_addr); c.count = 16'(count);
    c.dst_addr = 16'(dst_addr); c.dst_bank = 16'(dst_bank);
    i.payload = PAYLOAD_W'(c);
    return i;
  endfunction

  function automatic icu_instr_t ins_mmu(int act_base, int w_base, int k_steps,
                                        int rows, int act_stride, int out_base, int qshift);
    icu_instr_t i;
    mmu_cmd_t   c;
    i = '0; i.op = I_MMU;
    c.act_base = 16'(act_base); c.w_base = 16'(w_base); c.k_steps = 16'(k_steps);
    c.rows = 16'(rows); c.act_stride = 16'(act_stride); c.out_base = 16'(out_base);
    c.qshift = 6'(qshift);
    i.payload = PAYLOAD_W'(c);
    return i;
  endfunction

  function automatic icu_instr_t ins_nvu(int upc, int a0 = 0, int a1 = 0, int a2 = 0, int a3 = 0);
    icu_instr_t i;
    nvu_cmd_t   c;
    i = '0; i.op = I_NVU;
    c.upc = 16'(upc); c.arg0 = 32'(a0); c.arg1 = 32'(a1); c.arg2 = 32'(a2); c.arg3 = 32'(a3);
    i.payload = PAYLOAD_W'(c);
    return i;
  endfunction

  function automatic icu_instr_t ins_mwu(int nmem_row, int rows, int ext_addr);
    icu_instr_t i;
    mwu_cmd_t   c;
    i = '0; i.op = I_MWU;
    c.nmem_row = 16'(nmem_row); c.rows = 16'(rows); c.ext_addr = 32'(ext_addr);
    i.payload = PAYLOAD_W'(c);
    return i;
  endfunction

  function automatic icu_instr_t ins_sync(int mask);
    icu_instr_t i;
    i = '0; i.op = I_SYNC; i.sync_mask = 4'(mask);
    return i;
  endfunction

  function automatic icu_instr_t ins_end();
    icu_instr_t i;
    i = '0; i.op = I_END;
    return i;
  endfunction

  // Saturate a value to a signed field of w bits.
  function automatic longint sat(longint v, int w);
    longint mx, mn;
    mx = (64'sd1 <<< (w - 1)) - 1;
    mn = -(64'sd1 <<< (w - 1));
    if (w >= 64) return v;
    if (v > mx) return mx;
    if (v < mn) return mn;
    return v;
  endfunction

  // Reference piecewise-linear evaluation: linear search over the knots.
  function automatic shortint pwl_ref(shortint x, shortint knot[PWL_SEG],
                                      shortint value[PWL_SEG], shortint slope[PWL_SEG],
                                      int frac);
    int seg;
    longint d;
    seg = 0;
    for (int i = 0; i < PWL_SEG; i++) if (x >= knot[i]) seg = i;
    d = (longint'(x) - longint'(knot[seg])) * longint'(slope[seg]);
    d = d >>> frac;
    return shortint'(sat(longint'(value[seg]) + d, 16));
  endfunction

  // A square-root style table (the knots of the published 3-segment sqrt
  // example, scaled to Q8 fixed point and padded with its last segment):
  // knots 0, 0.15, 0.82, 2.0 -> values 0, 0.39, 0.9, 1.41.
  function automatic void sqrt_table(output shortint knot[PWL_SEG],
                                     output shortint value[PWL_SEG],
                                     output shortint slope[PWL_SEG]);
    for (int i = 0; i < PWL_SEG; i++) begin
      knot[i] = 16'sh7fff; value[i] = 0; slope[i] = 0;
    end
    knot[0] = 0;   value[0] = 0;   slope[0] = 16'(((100 - 0) * 256) / 38);
    knot[1] = 38;  value[1] = 100; slope[1] = 16'(((230 - 100) * 256) / (210 - 38));
    knot[2] = 210; value[2] = 230; slope[2] = 16'(((361 - 230) * 256) / (512 - 210));
  endfunction

  // ------------------------------------------------------------------
  // Microprograms used by the NVU and end-to-end testbenches.
  //   UP_TABLE (entry 0):  s0 = MMEM vector of the knots, s1 = vector step;
  //                        loads knots, values, slopes into the PWL table.
  //   UP_PWL   (entry 8):  s0 = MMEM vector, s1 = NMEM element address,
  //                        s2 = MIB activation word, s3 = vector count.
  //                        y = PWL(x) (frac 8) to NMEM and to the MIB.
  //   UP_GELU  (entry 16): s0 = MMEM vector, s1 = NMEM element address,
  //                        s3 = vector count - 1.  y = PWL(x) to NMEM,
  //                        software-pipelined: the load of vector i+1
  //                        shares a bundle with the evaluation of vector i,
  //                        so a vector costs 3 cycles (2-cycle load, store).
  //   UP_NORM  (entry 24): s0 = MMEM vector, s1 = NMEM element address,
  //                        s2 = element stride, s3 = vector count.
  //                        y = x - mean(x), stored with the given stride.
  //   UP_LN    (entry 32): s0 = MMEM vector, s1 = NMEM element address,
  //                        s3 = vector count.  Layer normalization of each
  //                        vector: d = x - mean, var = sum(d*d) / n,
  //                        y = (d * rsqrt(var)) >>> 6, where rsqrt is the
  //                        scalar PWL of the loaded table (frac 8).
  localparam int UP_TABLE = 0, UP_PWL = 8, UP_GELU = 16, UP_NORM = 24, UP_LN = 32,
                 UP_LEN = 48;

  function automatic void build_ucode(int n16, int act_per_vec, output ubundle_t uc[UP_LEN]);
    int lg;
    lg = $clog2(n16);
    for (int i = 0; i < UP_LEN; i++) uc[i] = bnop();
    // UP_TABLE
    uc[0].lsu = lop(L_LD_MMEM, 1, 0);  uc[0].scu = sop(S_ADD, EW64, 0, 0, 1);
    uc[1].lsu = lop(L_LD_MMEM, 2, 0);  uc[1].scu = sop(S_ADD, EW64, 0, 0, 1);
    uc[1].vn  = vop(V_PWLK, EW16, 0, 1, 0);
    uc[2].lsu = lop(L_LD_MMEM, 3, 0);  uc[2].vn = vop(V_PWLV, EW16, 0, 2, 0);
    uc[3].vn  = vop(V_PWLS, EW16, 0, 3, 0);
    uc[3].ctrl = ctl(C_END);
    // UP_PWL
    uc[8].ctrl  = ctl(C_LDC, 0, 3);    uc[8].scu = sop(S_LI, EW64, 10, 0, 0, 1, n16);
    uc[9].scu   = sop(S_LI, EW64, 11, 0, 0, 1, act_per_vec);
    uc[10].lsu  = lop(L_LD_MMEM, 1, 0); uc[10].scu = sop(S_ADD, EW64, 0, 0, 0, 1, 1);
    uc[11].vn   = vop(V_PWL, EW16, 2, 1, 0, 0, 0, 8);
    uc[12].lsu  = lop(L_ST_NMEM, 2, 1); uc[12].scu = sop(S_ADD, EW64, 1, 1, 10);
    uc[13].lsu  = lop(L_ST_ACT, 2, 2);  uc[13].scu = sop(S_ADD, EW64, 2, 2, 11);
    uc[13].ctrl = ctl(C_DJNZ, 0, 0, 10);
    uc[14].ctrl = ctl(C_END);
    // UP_GELU
    uc[16].ctrl = ctl(C_LDC, 0, 3);    uc[16].scu = sop(S_LI, EW64, 10, 0, 0, 1, n16);
    uc[17].lsu  = lop(L_LD_MMEM, 1, 0); uc[17].scu = sop(S_ADD, EW64, 0, 0, 0, 1, 1);
    uc[18].lsu  = lop(L_LD_MMEM, 1, 0); uc[18].scu = sop(S_ADD, EW64, 0, 0, 0, 1, 1);
    uc[18].vn   = vop(V_PWL, EW16, 2, 1, 0, 0, 0, 8);
    uc[19].lsu  = lop(L_ST_NMEM, 2, 1); uc[19].scu = sop(S_ADD, EW64, 1, 1, 10);
    uc[19].ctrl = ctl(C_DJNZ, 0, 0, 18);
    uc[20].vn   = vop(V_PWL, EW16, 2, 1, 0, 0, 0, 8);
    uc[21].lsu  = lop(L_ST_NMEM, 2, 1); uc[21].ctrl = ctl(C_END);
    // UP_NORM
    uc[24].ctrl = ctl(C_LDC, 1, 3);
    uc[25].lsu  = lop(L_LD_MMEM, 1, 0); uc[25].scu = sop(S_ADD, EW64, 0, 0, 0, 1, 1);
    uc[26].vn   = vop(V_RSUM, EW16, 20, 1, 0);
    uc[27].scu  = sop(S_SRA, EW64, 21, 20, 0, 1, lg);
    uc[28].va   = vop(V_SUB, EW16, 3, 1, 0, 1, 21);
    uc[29].lsu  = lop(L_STS, 3, 1, 0, 2); uc[29].scu = sop(S_ADD, EW64, 1, 1, 0, 1, 1);
    uc[29].ctrl = ctl(C_DJNZ, 1, 0, 25);
    uc[30].ctrl = ctl(C_END);
    // UP_LN
    uc[32].ctrl = ctl(C_LDC, 0, 3);    uc[32].scu = sop(S_LI, EW64, 10, 0, 0, 1, n16);
    uc[33].lsu  = lop(L_LD_MMEM, 1, 0); uc[33].scu = sop(S_ADD, EW64, 0, 0, 0, 1, 1);
    uc[34].vn   = vop(V_RSUM, EW16, 20, 1, 0);
    uc[35].scu  = sop(S_SRA, EW64, 21, 20, 0, 1, lg);
    uc[36].va   = vop(V_SUB, EW16, 3, 1, 0, 1, 21);
    uc[37].vn   = vop(V_DOT, EW16, 22, 3, 3, 0, 0, 0);
    uc[38].scu  = sop(S_SRA, EW64, 23, 22, 0, 1, lg);
    uc[39].scu  = sop(S_PWL, EW64, 24, 23, 0, 1, 8);
    uc[40].vm   = vop(V_MUL, EW16, 4, 3, 0, 1, 24, 6);
    uc[41].lsu  = lop(L_ST_NMEM, 4, 1); uc[41].scu = sop(S_ADD, EW64, 1, 1, 10);
    uc[41].ctrl = ctl(C_DJNZ, 0, 0, 33);
    uc[42].ctrl = ctl(C_END);
  endfunction

  // 1/sqrt table in Q12 on [16, 4096]: knots 16 * 2^i (i = 0..8),
  // values round(4096 / sqrt(knot)), slopes in Q8.
  function automatic void rsqrt_table(output shortint knot[PWL_SEG],
                                      output shortint value[PWL_SEG],
                                      output shortint slope[PWL_SEG]);
    for (int i = 0; i < PWL_SEG; i++) begin
      knot[i] = (i < 9) ? shortint'(16 << i) : 16'sh7fff;
      value[i] = (i < 9) ? shortint'($rtoi(4096.0 / $sqrt(real'(16 << i)) + 0.5)) : 16'sh0;
      slope[i] = 0;
    end
    for (int i = 0; i < 8; i++)
      slope[i] = shortint'((int'(value[i+1] - value[i]) * 256) / int'(knot[i+1] - knot[i]));
  endfunction

  // Reference of UP_LN on one vector of n 16-bit elements.
  function automatic void ln_ref(shortint x[], int n, shortint knot[PWL_SEG],
                                 shortint value[PWL_SEG], shortint slope[PWL_SEG],
                                 output shortint y[]);
    longint s, dot, var_, p;
    shortint m, inv;
    shortint d[];
    d = new[n]; y = new[n];
    s = 0;
    for (int i = 0; i < n; i++) s += x[i];
    m = shortint'(16'(s >>> $clog2(n)));
    dot = 0;
    for (int i = 0; i < n; i++) begin
      d[i] = shortint'(16'(longint'(x[i]) - longint'(m)));
      dot += longint'(d[i]) * longint'(d[i]);
    end
    var_ = dot >>> $clog2(n);
    inv = pwl_ref(shortint'(16'(var_)), knot, value, slope, 8);
    for (int i = 0; i < n; i++) begin
      p = (longint'(d[i]) * longint'(inv)) >>> 6;
      y[i] = shortint'(sat(p, 16));
    end
  endfunction

  // Reference of UP_NORM on one vector of n 16-bit elements.
  function automatic shortint norm_ref(shortint x, longint sum, int n);
    longint m;
    m = sum >>> $clog2(n);
    return shortint'(16'(longint'(x) - longint'(shortint'(16'(m)))));
  endfunction
endpackage
