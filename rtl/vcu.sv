// vcu: NVU vector compute unit.
//
// Three slots execute concurrently in every micro-instruction bundle, as in
// the published VCU (which runs up to three operations at once):
//   va - ALU and shift: add, sub, min, max, and, or, xor, compare
//        (<, >=, = give 1/0 per element), shifts, move, and the precision
//        conversions widen-low / widen-high (sign-extend the half-width
//        elements of the low or high half) and narrow (saturate the
//        elements of two registers into half-width elements);
//   vm - multiply: (a*b) >>> imm, saturated to the element width;
//   vn - nonlinear and reduce: piecewise-linear evaluation of 16-bit
//        elements, loading of the piecewise-linear table, permute
//        (out[i] = a[b[i] mod n]), and the reductions sum, max, min and
//        dot product (sum of (a*b) >>> imm), whose 64-bit result goes to
//        the scalar register file.
// Every slot works on 8, 16, 32 or 64-bit elements (field ew); the second
// operand is either a vector register or a scalar register broadcast to all
// elements. The operation set, the multi-precision element widths, the
// scalar broadcast, reductions into the SRF and the dedicated piecewise
// hardware follow the published design. The assignment of operations to
// slots, the encodings, saturation rules and the table format (PWL_SEG
// knots, values and slopes, all 16-bit, one table shared by every lane and
// copied to the scalar unit) are this design's choices; each element width
// has its own datapath here rather than sharing one multi-precision
// datapath.
//
// Timing: results are combinational from the operands; the NVU writes them
// back at the end of the cycle in which the bundle commits (commit = 1).
// The table is written on commit.
module vcu
  import npe_pkg::*;
#(
  parameter int VRWIDTH = 1024,
  parameter int NSEG    = PWL_SEG
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       commit,
  input  uvcu_t                      ia, im, in_,
  input  logic [VRWIDTH-1:0]         a_a, a_b, m_a, m_b, n_a, n_b,
  input  logic [63:0]                a_s, m_s, n_s,
  output logic                       a_we, m_we, n_we, n_swe,
  output logic [VRWIDTH-1:0]         a_res, m_res, n_res,
  output logic [63:0]                n_sres,
  output logic [NSEG-1:0][15:0]      tbl_knot, tbl_value, tbl_slope
);
  logic [3:0][VRWIDTH-1:0] ra, rm, rn;
  logic [3:0][63:0]        rs;

  for (genvar g = 0; g < 4; g++) begin : g_w
    localparam int W  = 8 << g;
    localparam int N  = VRWIDTH / W;
    localparam int HW = W / 2;
    localparam int IW = $clog2(N);

    logic [VRWIDTH-1:0] lane_a, lane_m, lane_p, wid_l, wid_h, narw;
    logic signed [63:0] sum, mx, mn, dot;
    logic signed [2*W-1:0] pd_v [N];

    for (genvar i = 0; i < N; i++) begin : g_l
      logic signed [W-1:0]   a, b, am, bm, an, bn, r;
      logic signed [2*W-1:0] pm;
      assign a  = a_a[i*W +: W];
      assign b  = ia.scal  ? a_s[W-1:0] : a_b[i*W +: W];
      assign am = m_a[i*W +: W];
      assign bm = im.scal  ? m_s[W-1:0] : m_b[i*W +: W];
      assign an = n_a[i*W +: W];
      assign bn = in_.scal ? n_s[W-1:0] : n_b[i*W +: W];

      always_comb begin
        case (ia.op)
          V_ADD:   r = a + b;
          V_SUB:   r = a - b;
          V_MIN:   r = (a < b) ? a : b;
          V_MAX:   r = (a < b) ? b : a;
          V_AND:   r = a & b;
          V_OR:    r = a | b;
          V_XOR:   r = a ^ b;
          V_SLT:   r = W'(a < b);
          V_SGE:   r = W'(a >= b);
          V_SEQ:   r = W'(a == b);
          V_SLL:   r = a << b[5:0];
          V_SRA:   r = a >>> b[5:0];
          V_SRL:   r = W'($unsigned(a) >> b[5:0]);
          default: r = a;
        endcase
      end
      assign lane_a[i*W +: W] = r;

      // multiply slot, saturating
      always_comb begin
        pm = ((2*W)'(am) * (2*W)'(bm)) >>> im.imm;
        if (pm > $signed({{(W+1){1'b0}}, {(W-1){1'b1}}}))               lane_m[i*W +: W] = {1'b0, {(W-1){1'b1}}};
        else if (pm < $signed({{(W+1){1'b1}}, {(W-1){1'b0}}})) lane_m[i*W +: W] = {1'b1, {(W-1){1'b0}}};
        else                                                   lane_m[i*W +: W] = pm[W-1:0];
      end

      // dot-product term and permute
      assign pd_v[i] = ((2*W)'(an) * (2*W)'(bn)) >>> in_.imm;
      assign lane_p[i*W +: W] = n_a[int'(bn[IW-1:0])*W +: W];

      // precision conversion
      if (W >= 16) begin : g_cv
        logic signed [W-1:0] sa, sb;
        assign wid_l[i*W +: W] = W'($signed(a_a[i*HW +: HW]));
        assign wid_h[i*W +: W] = W'($signed(a_a[(N+i)*HW +: HW]));
        always_comb begin
          sa = a; sb = b;
          if (sa > $signed({{(HW+1){1'b0}}, {(HW-1){1'b1}}}))              narw[i*HW +: HW] = {1'b0, {(HW-1){1'b1}}};
          else if (sa < $signed({{(HW+1){1'b1}}, {(HW-1){1'b0}}})) narw[i*HW +: HW] = {1'b1, {(HW-1){1'b0}}};
          else                                              narw[i*HW +: HW] = sa[HW-1:0];
          if (sb > $signed({{(HW+1){1'b0}}, {(HW-1){1'b1}}}))              narw[(N+i)*HW +: HW] = {1'b0, {(HW-1){1'b1}}};
          else if (sb < $signed({{(HW+1){1'b1}}, {(HW-1){1'b0}}})) narw[(N+i)*HW +: HW] = {1'b1, {(HW-1){1'b0}}};
          else                                              narw[(N+i)*HW +: HW] = sb[HW-1:0];
        end
      end else begin : g_nocv
        assign wid_l[i*W +: W] = a;
        assign wid_h[i*W +: W] = a;
        assign narw[i*W +: W]  = a;
      end
    end

    // reductions
    always_comb begin
      sum = '0;
      dot = '0;
      mx  = 64'($signed(n_a[W-1:0]));
      mn  = 64'($signed(n_a[W-1:0]));
      for (int i = 0; i < N; i++) begin
        logic signed [63:0] e;
        e   = 64'($signed(n_a[i*W +: W]));
        sum = sum + e;
        if (e > mx) mx = e;
        if (e < mn) mn = e;
        dot = dot + 64'(pd_v[i]);
      end
    end

    always_comb begin
      case (ia.op)
        V_WIDL:  ra[g] = wid_l;
        V_WIDH:  ra[g] = wid_h;
        V_NARW:  ra[g] = narw;
        default: ra[g] = lane_a;
      endcase
      rm[g] = lane_m;
      rn[g] = lane_p;
      case (in_.op)
        V_RMAX:  rs[g] = mx;
        V_RMIN:  rs[g] = mn;
        V_DOT:   rs[g] = dot;
        default: rs[g] = sum;
      endcase
    end
  end

  // piecewise-linear table and evaluation (16-bit elements)
  localparam int N16 = VRWIDTH / 16;
  logic [NSEG-1:0][15:0] knot, value, slope;
  logic [VRWIDTH-1:0]    pwl_res;

  for (genvar i = 0; i < N16; i++) begin : g_pwl
    pwl_eval #(.NSEG(NSEG)) u_pwl (
      .x     (n_a[i*16 +: 16]),
      .knot  (knot),
      .value (value),
      .slope (slope),
      .frac  (in_.imm),
      .y     (pwl_res[i*16 +: 16])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      knot <= '0; value <= '0; slope <= '0;
    end else if (commit) begin
      case (in_.op)
        V_PWLK: knot  <= n_a[NSEG*16-1:0];
        V_PWLV: value <= n_a[NSEG*16-1:0];
        V_PWLS: slope <= n_a[NSEG*16-1:0];
        default: ;
      endcase
    end
  end

  assign tbl_knot  = knot;
  assign tbl_value = value;
  assign tbl_slope = slope;

  always_comb begin
    a_res  = ra[ia.ew];
    m_res  = rm[im.ew];
    n_res  = (in_.op == V_PWL) ? pwl_res : rn[in_.ew];
    n_sres = rs[in_.ew];
    a_we   = commit && (ia.op inside {[V_ADD:V_NARW]});
    m_we   = commit && (im.op == V_MUL);
    n_we   = commit && (in_.op inside {V_PWL, V_PERM});
    n_swe  = commit && (in_.op inside {[V_RSUM:V_DOT]});
  end
endmodule
