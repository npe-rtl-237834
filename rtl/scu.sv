// scu: NVU scalar compute unit.
//
// Works on the 64-bit scalar registers next to the vector unit, e.g. to
// turn a reduction result into a normalisation factor while the vector
// slots keep streaming. Operations: add, sub, mul (low 64 bits), shifts,
// min, max, move, load immediate, count leading zeros (for range
// normalisation) and piecewise-linear evaluation of a 16-bit value with the
// same table as the vector unit (a copy of it). The second operand is a
// register or the sign-extended 32-bit immediate. The result is truncated
// to the element width ew (8/16/32/64 bits) and sign-extended to 64 bits.
// The SCU, its 8-64-bit operation and its use for 1/sqrt(x) after a vector
// reduction follow the published design; the operation list and encodings
// are this design's choices. Combinational; written back on commit.
module scu
  import npe_pkg::*;
#(
  parameter int NSEG = PWL_SEG
) (
  input  logic                   commit,
  input  uscu_t                  ins,
  input  logic [63:0]            a,
  input  logic [63:0]            b_reg,
  input  logic [NSEG-1:0][15:0]  tbl_knot,
  input  logic [NSEG-1:0][15:0]  tbl_value,
  input  logic [NSEG-1:0][15:0]  tbl_slope,
  output logic                   we,
  output logic [63:0]            res
);
  logic signed [63:0] sa, sb, r;
  logic [6:0]         clz;
  logic [15:0]        pwl_y;
  logic [6:0]         bits;

  assign sa = a;
  assign sb = ins.use_imm ? 64'($signed(ins.imm)) : b_reg;

  pwl_eval #(.NSEG(NSEG)) u_pwl (
    .x     (sa[15:0]),
    .knot  (tbl_knot),
    .value (tbl_value),
    .slope (tbl_slope),
    .frac  (sb[5:0]),
    .y     (pwl_y)
  );

  // leading zeros of a within the element width
  always_comb begin
    bits = 7'd8 << ins.ew;
    clz  = bits;
    for (int i = 0; i < 64; i++)
      if (7'(i) < bits && sa[i]) clz = bits - 7'(i) - 7'd1;
  end

  always_comb begin
    case (ins.op)
      S_ADD:   r = sa + sb;
      S_SUB:   r = sa - sb;
      S_MUL:   r = sa * sb;
      S_SLL:   r = sa << sb[5:0];
      S_SRA:   r = sa >>> sb[5:0];
      S_SRL:   r = $unsigned(sa) >> sb[5:0];
      S_MIN:   r = (sa < sb) ? sa : sb;
      S_MAX:   r = (sa < sb) ? sb : sa;
      S_LI:    r = sb;
      S_CLZ:   r = 64'(clz);
      S_PWL:   r = 64'($signed(pwl_y));
      default: r = sa;   // S_MOV
    endcase
    case (ins.ew)
      EW8:     res = 64'($signed(r[7:0]));
      EW16:    res = 64'($signed(r[15:0]));
      EW32:    res = 64'($signed(r[31:0]));
      default: res = r;
    endcase
  end

  assign we = commit && (ins.op != S_NOP);
endmodule
