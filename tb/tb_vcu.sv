// tb_vcu: checks the vector compute unit against a per-element reference
// model: random ALU/shift, multiply, permute and reduction operations at all
// four element widths (8/16/32/64 bits), with vector and broadcast-scalar
// second operands, the precision conversions, and piecewise-linear
// evaluation after loading the table. Reduced size: VRWIDTH 256.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_vcu;
  import npe_pkg::*;
  import npe_tb_pkg::*;
  localparam int VRWIDTH = 256;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic commit;
  uvcu_t ia, im, in_;
  logic [VRWIDTH-1:0] a_a, a_b, m_a, m_b, n_a, n_b;
  logic [63:0] a_s, m_s, n_s;
  logic a_we, m_we, n_we, n_swe;
  logic [VRWIDTH-1:0] a_res, m_res, n_res;
  logic [63:0] n_sres;
  logic [PWL_SEG-1:0][15:0] tbl_knot, tbl_value, tbl_slope;

  vcu #(.VRWIDTH(VRWIDTH)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint el(logic [VRWIDTH-1:0] v, int i, int w);
    logic [63:0] x;
    x = 64'(v >> (i * w));
    case (w)
      8:  return longint'($signed(x[7:0]));
      16: return longint'($signed(x[15:0]));
      32: return longint'($signed(x[31:0]));
      default: return longint'(x);
    endcase
  endfunction

  function automatic logic [VRWIDTH-1:0] rvec();
    logic [VRWIDTH-1:0] v;
    for (int i = 0; i < VRWIDTH / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic longint alu_ref(vop_e op, longint a, longint b, int w);
    longint ua;
    int sh;
    sh = int'(b & 63);
    ua = (w == 64) ? a : (a & ((64'sd1 <<< w) - 1));
    case (op)
      V_ADD: return a + b;
      V_SUB: return a - b;
      V_MIN: return (a < b) ? a : b;
      V_MAX: return (a < b) ? b : a;
      V_AND: return a & b;
      V_OR:  return a | b;
      V_XOR: return a ^ b;
      V_SLT: return longint'(a < b);
      V_SGE: return longint'(a >= b);
      V_SEQ: return longint'(a == b);
      V_SLL: return (sh >= w) ? 0 : (a <<< sh);
      V_SRA: return (sh >= w) ? ((a < 0) ? -1 : 0) : (a >>> sh);
      V_SRL: return (sh >= w) ? 0 : longint'($unsigned(ua) >> sh);
      default: return a;
    endcase
  endfunction

  function automatic longint trunc(longint v, int w);
    if (w == 64) return v;
    v = v & ((64'sd1 <<< w) - 1);
    if (v >= (64'sd1 <<< (w - 1))) v = v - (64'sd1 <<< w);
    return v;
  endfunction

  vop_e aops[16] = '{V_ADD, V_SUB, V_MIN, V_MAX, V_AND, V_OR, V_XOR, V_SLT,
                     V_SGE, V_SEQ, V_SLL, V_SRA, V_SRL, V_MOV, V_ADD, V_SUB};
  vop_e nops[5]  = '{V_RSUM, V_RMAX, V_RMIN, V_DOT, V_PERM};

  shortint kn[PWL_SEG], va[PWL_SEG], sl[PWL_SEG];

  initial begin
    commit = 0; ia = '0; im = '0; in_ = '0;
    a_a = 0; a_b = 0; m_a = 0; m_b = 0; n_a = 0; n_b = 0; a_s = 0; m_s = 0; n_s = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      int ew, w, n, imm;
      bit scal;
      vop_e aop, nop;
      longint s, mx, mn, d;
      @(negedge clk);
      ew = $urandom % 4; w = 8 << ew; n = VRWIDTH / w;
      scal = ($urandom % 4) == 0;
      aop = aops[$urandom % 16];
      nop = nops[$urandom % 5];
      imm = (w == 64) ? 0 : ($urandom % w);
      a_a = rvec(); a_b = rvec(); m_a = rvec(); m_b = rvec(); n_a = rvec(); n_b = rvec();
      a_s = {$urandom, $urandom}; m_s = {$urandom, $urandom}; n_s = {$urandom, $urandom};
      if (w == 64) begin   // keep 64-bit products in range of the model
        for (int i = 0; i < n; i++) begin
          m_a[i*64 +: 64] = 64'(longint'($signed(32'($urandom))));
          m_b[i*64 +: 64] = 64'(longint'($signed(16'($urandom))));
          n_a[i*64 +: 64] = 64'(longint'($signed(24'($urandom))));
          n_b[i*64 +: 64] = 64'(longint'($signed(16'($urandom))));
        end
        m_s = 64'(longint'($signed(16'($urandom))));
        n_s = 64'(longint'($signed(16'($urandom))));
      end
      ia  = vop(aop, ew_e'(ew), 1, 2, 3, scal, 4, 0);
      im  = vop(V_MUL, ew_e'(ew), 1, 2, 3, scal, 5, imm);
      in_ = vop(nop, ew_e'(ew), 1, 2, 3, scal, 6, imm);
      commit = 1;
      #1;
      chk(a_we && m_we, "write enables");
      for (int i = 0; i < n; i++) begin
        longint bA, bM, bN, expA, expM;
        bA = scal ? el(VRWIDTH'(a_s), 0, w) : el(a_b, i, w);
        bM = scal ? el(VRWIDTH'(m_s), 0, w) : el(m_b, i, w);
        expA = trunc(alu_ref(aop, el(a_a, i, w), bA, w), w);
        chk(el(a_res, i, w) == expA, $sformatf("alu %s w%0d lane %0d", aop.name(), w, i));
        expM = sat((el(m_a, i, w) * bM) >>> imm, w);
        chk(el(m_res, i, w) == expM, $sformatf("mul w%0d lane %0d", w, i));
      end
      s = 0; mx = el(n_a, 0, w); mn = mx; d = 0;
      for (int i = 0; i < n; i++) begin
        longint e, bN;
        e = el(n_a, i, w);
        bN = scal ? el(VRWIDTH'(n_s), 0, w) : el(n_b, i, w);
        s += e;
        if (e > mx) mx = e;
        if (e < mn) mn = e;
        d += (e * bN) >>> imm;
        if (nop == V_PERM)
          chk(el(n_res, i, w) == el(n_a, int'(bN & (n - 1)), w), $sformatf("perm w%0d lane %0d", w, i));
      end
      case (nop)
        V_RSUM: chk(n_swe && longint'(n_sres) == s,  $sformatf("rsum w%0d", w));
        V_RMAX: chk(n_swe && longint'(n_sres) == mx, $sformatf("rmax w%0d", w));
        V_RMIN: chk(n_swe && longint'(n_sres) == mn, $sformatf("rmin w%0d", w));
        V_DOT:  chk(n_swe && longint'(n_sres) == d,  $sformatf("dot w%0d", w));
        default: chk(n_we && !n_swe, "perm writes a vector");
      endcase
    end
    // precision conversions at 16 -> 32 bits
    @(negedge clk);
    a_a = rvec(); a_b = rvec(); ia = vop(V_WIDL, EW32, 1, 2, 3); im = '0; in_ = '0; #1;
    for (int i = 0; i < VRWIDTH / 32; i++) chk(el(a_res, i, 32) == el(a_a, i, 16), "widen low");
    ia = vop(V_WIDH, EW32, 1, 2, 3); #1;
    for (int i = 0; i < VRWIDTH / 32; i++) chk(el(a_res, i, 32) == el(a_a, i + VRWIDTH / 32, 16), "widen high");
    ia = vop(V_NARW, EW32, 1, 2, 3); #1;
    for (int i = 0; i < VRWIDTH / 32; i++) begin
      chk(el(a_res, i, 16) == sat(el(a_a, i, 32), 16), "narrow a");
      chk(el(a_res, i + VRWIDTH / 32, 16) == sat(el(a_b, i, 32), 16), "narrow b");
    end
    // piecewise-linear table load and evaluation
    sqrt_table(kn, va, sl);
    @(negedge clk); ia = '0;
    for (int i = 0; i < PWL_SEG; i++) n_a[i*16 +: 16] = kn[i];
    in_ = vop(V_PWLK, EW16, 0, 2, 3);
    @(negedge clk);
    for (int i = 0; i < PWL_SEG; i++) n_a[i*16 +: 16] = va[i];
    in_ = vop(V_PWLV, EW16, 0, 2, 3);
    @(negedge clk);
    for (int i = 0; i < PWL_SEG; i++) n_a[i*16 +: 16] = sl[i];
    in_ = vop(V_PWLS, EW16, 0, 2, 3);
    @(negedge clk);
    commit = 0;
    for (int it = 0; it < 20; it++) begin
      for (int i = 0; i < VRWIDTH / 16; i++) n_a[i*16 +: 16] = 16'($urandom % 700) - 16'd50;
      in_ = vop(V_PWL, EW16, 1, 2, 3, 0, 0, 8); #1;
      chk(!n_we, "no write without commit");
      for (int i = 0; i < VRWIDTH / 16; i++)
        chk(el(n_res, i, 16) == pwl_ref(shortint'(el(n_a, i, 16)), kn, va, sl, 8),
            $sformatf("pwl lane %0d x=%0d", i, el(n_a, i, 16)));
      #4;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
