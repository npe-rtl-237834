// tb_scu: checks the scalar compute unit against a reference model: random
// operations at all element widths with register and immediate operands,
// count-leading-zeros, and piecewise-linear evaluation with a loaded table.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_scu;
  import npe_pkg::*;
  import npe_tb_pkg::*;
  int checks = 0, failures = 0;
  logic commit;
  uscu_t ins;
  logic [63:0] a, b_reg, res;
  logic we;
  logic [PWL_SEG-1:0][15:0] tbl_knot, tbl_value, tbl_slope;
  shortint kn[PWL_SEG], va[PWL_SEG], sl[PWL_SEG];

  scu dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint trunc(longint v, int w);
    if (w == 64) return v;
    v = v & ((64'sd1 <<< w) - 1);
    if (v >= (64'sd1 <<< (w - 1))) v = v - (64'sd1 <<< w);
    return v;
  endfunction

  sop_e ops[12] = '{S_ADD, S_SUB, S_MUL, S_SLL, S_SRA, S_SRL, S_MIN, S_MAX, S_MOV, S_LI, S_CLZ, S_PWL};

  initial begin
    sqrt_table(kn, va, sl);
    for (int i = 0; i < PWL_SEG; i++) begin
      tbl_knot[i] = kn[i]; tbl_value[i] = va[i]; tbl_slope[i] = sl[i];
    end
    commit = 1;
    for (int it = 0; it < 3000; it++) begin
      int ew, w, sh;
      bit ui;
      longint sa, sb, r, e;
      sop_e op;
      ew = $urandom % 4; w = 8 << ew;
      op = ops[$urandom % 12];
      ui = 1'($urandom);
      a = {$urandom, $urandom};
      if ($urandom % 3 == 0) a = a >> ($urandom % 64);
      b_reg = {$urandom, $urandom};
      ins = sop(op, ew_e'(ew), 1, 2, 3, ui, longint'($signed(32'($urandom))));
      if (op == S_PWL) begin
        a = 64'($urandom % 700) - 64'd50;
        ins.imm = 8;
        ins.use_imm = 1;
      end
      #1;
      sa = longint'(a);
      sb = ui ? longint'($signed(ins.imm)) : longint'(b_reg);
      sh = int'(sb & 63);
      case (op)
        S_ADD: r = sa + sb;
        S_SUB: r = sa - sb;
        S_MUL: r = sa * sb;
        S_SLL: r = sa <<< sh;
        S_SRA: r = sa >>> sh;
        S_SRL: r = longint'(64'(a) >> sh);
        S_MIN: r = (sa < sb) ? sa : sb;
        S_MAX: r = (sa < sb) ? sb : sa;
        S_LI:  r = sb;
        S_CLZ: begin
          r = w;
          for (int i = w - 1; i >= 0; i--) if (a[i]) begin r = w - 1 - i; break; end
        end
        S_PWL: r = longint'(pwl_ref(shortint'(a[15:0]), kn, va, sl, 8));
        default: r = sa;
      endcase
      e = trunc(r, w);
      chk(we && longint'(res) == e, $sformatf("%s w%0d a=%0h b=%0h got %0h exp %0h", op.name(), w, a, sb, res, e));
    end
    commit = 0; #1;
    chk(!we, "no write without commit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
