// tb_nvu - self-checking test of the complete Nonlinear Vector Unit.
//
// The NVU is connected to a real NMEM and MMEM (VRWIDTH = 256, 32-element
// MMEM rows so a row holds two vectors).  The testbench loads the
// microprograms of npe_tb_pkg through the microcode write port, fills the
// MMEM directly, and then issues three NVU instructions:
//   UP_TABLE  load the square-root PWL table (knots, values, slopes),
//   UP_PWL    y = PWL(x) for 8 vectors, stored to NMEM and to the MIB,
//   UP_GELU   the same evaluation, software-pipelined (3 cycles a vector),
//             with its rate checked against 4 elements per cycle,
//   UP_NORM   y = x - mean(x), stored to NMEM with a stride of 8 elements
//             (a transposed layout that produces NMEM bank conflicts),
//   UP_LN     layer normalization of 8 vectors with a 1/sqrt table,
//             using a reduction, a dot product, the scalar PWL and a
//             vector-scalar multiply.
// NMEM results are read back through the MWU port and compared with the
// reference functions; MIB writes are captured and compared.  The cycle
// count of UP_PWL is checked against the bundle schedule (5 cycles per
// vector: a 2-cycle MMEM load and three single-cycle bundles).
//
// The NVU structure and PWL evaluation follow the published design; the
// microprograms and their encodings are this design's own.
`timescale 1ns/1ps
module tb_nvu;
  import npe_pkg::*;
  import npe_tb_pkg::*;

  localparam int VRWIDTH = 256;
  localparam int N16     = VRWIDTH / 16;
  localparam int N_OUT   = 32;
  localparam int VPR     = N_OUT * 16 / VRWIDTH;
  localparam int N_PE    = 8;
  localparam int NVEC    = 8;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy, stall;
  nvu_cmd_t cmd;
  logic ucode_we; logic [8:0] ucode_waddr; ubundle_t ucode_wdata;
  logic nmem_req, nmem_we, nmem_done;
  logic [N16-1:0][31:0] nmem_addr;
  logic [N16-1:0][15:0] nmem_wdata, nmem_rdata;
  logic mmem_rd_en; logic [15:0] mmem_raddr; logic [VRWIDTH-1:0] mmem_rdata;
  logic mmem_we; logic [7:0] mmem_waddr; logic [N_OUT*16-1:0] mmem_wdata;
  logic mib_we, mib_wsel; logic [2:0] mib_bank; logic [15:0] mib_addr;
  logic [VRWIDTH-1:0] mib_wdata;
  logic mwu_req, mwu_gnt, mwu_rvalid; logic [8:0] mwu_row;
  logic [N16-1:0][15:0] mwu_rdata;
  logic lsu_conflict, lsu_wait;

  nvu #(.VRWIDTH(VRWIDTH), .N_PE(N_PE)) dut (.*);

  nmem #(.VRWIDTH(VRWIDTH)) u_nmem (
    .clk, .rst_n, .lsu_req(nmem_req), .lsu_we(nmem_we), .lsu_addr(nmem_addr),
    .lsu_wdata(nmem_wdata), .lsu_done(nmem_done), .lsu_rdata(nmem_rdata),
    .lsu_conflict, .lsu_wait, .mwu_req, .mwu_row, .mwu_gnt, .mwu_rvalid, .mwu_rdata);

  mmem #(.N_OUT(N_OUT), .VRWIDTH(VRWIDTH)) u_mmem (
    .clk, .we(mmem_we), .waddr(mmem_waddr), .wdata(mmem_wdata),
    .rd_en(mmem_rd_en), .raddr(mmem_raddr), .rdata(mmem_rdata));

  int checks = 0, failures = 0;
  int conflicts = 0;
  always @(posedge clk) if (lsu_conflict) conflicts++;

  logic [VRWIDTH-1:0] mib_cap [256];
  always @(posedge clk) if (mib_we && !mib_wsel) mib_cap[mib_addr[7:0]] <= mib_wdata;

  initial begin
    #2_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  shortint knot[PWL_SEG], value[PWL_SEG], slope[PWL_SEG];
  shortint x [NVEC][N16];
  ubundle_t uc [UP_LEN];

  task automatic run_cmd(int upc, int a0, int a1, int a2, int a3, output int cycles);
    cmd = '0;
    cmd.upc = 16'(upc); cmd.arg0 = 32'(a0); cmd.arg1 = 32'(a1);
    cmd.arg2 = 32'(a2); cmd.arg3 = 32'(a3);
    cmd_valid = 1;
    @(posedge clk); #1;
    while (!cmd_ready) begin @(posedge clk); #1; end
    cmd_valid = 0;
    cycles = 1;
    while (busy) begin @(posedge clk); #1; cycles++; end
  endtask

  task automatic read_row(int row, output logic [N16-1:0][15:0] d);
    mwu_req = 1; mwu_row = 9'(row);
    @(posedge clk); #1;
    while (!mwu_gnt) begin @(posedge clk); #1; end
    mwu_req = 0;
    while (!mwu_rvalid) begin @(posedge clk); #1; end
    d = mwu_rdata;
  endtask

  initial begin
    int cyc, nz;
    logic [N16-1:0][15:0] row;
    cmd_valid = 0; cmd = '0; ucode_we = 0; ucode_waddr = '0; ucode_wdata = '0;
    mmem_we = 0; mmem_waddr = '0; mmem_wdata = '0; mwu_req = 0; mwu_row = '0;
    sqrt_table(knot, value, slope);
    build_ucode(N16, VRWIDTH / 256, uc);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // microcode
    for (int i = 0; i < UP_LEN; i++) begin
      ucode_we = 1; ucode_waddr = 9'(i); ucode_wdata = uc[i];
      @(posedge clk); #1;
    end
    ucode_we = 0;
    // table rows 20..22 (vectors 40, 42, 44), data rows 0..3 (vectors 0..7)
    for (int t = 0; t < 3; t++) begin
      mmem_wdata = '0;
      for (int i = 0; i < PWL_SEG; i++)
        mmem_wdata[i*16 +: 16] = (t == 0) ? knot[i] : (t == 1) ? value[i] : slope[i];
      mmem_we = 1; mmem_waddr = 8'(20 + t);
      @(posedge clk); #1;
    end
    for (int r = 0; r < NVEC / VPR; r++) begin
      for (int e = 0; e < N_OUT; e++) begin
        shortint v;
        v = shortint'($urandom_range(0, 1200)) - 200;
        x[r*VPR + e / N16][e % N16] = v;
        mmem_wdata[e*16 +: 16] = v;
      end
      mmem_we = 1; mmem_waddr = 8'(r);
      @(posedge clk); #1;
    end
    mmem_we = 0;

    run_cmd(UP_TABLE, 20 * VPR, VPR, 0, 0, cyc);
    run_cmd(UP_PWL, 0, 0, 100, NVEC, cyc);
    // 4 argument cycles, LDC and LI bundles, 5 cycles per vector, END
    check(cyc <= 4 + 2 + 5 * NVEC + 3, $sformatf("UP_PWL took %0d cycles", cyc));
    $display("UP_PWL: %0d vectors in %0d cycles", NVEC, cyc);
    for (int j = 0; j < NVEC; j++) begin
      read_row(j, row);
      for (int l = 0; l < N16; l++) begin
        shortint e;
        e = pwl_ref(x[j][l], knot, value, slope, 8);
        check(row[l] == e, $sformatf("PWL vec %0d lane %0d x=%0d got %0d exp %0d",
                                     j, l, x[j][l], $signed(row[l]), e));
        check(mib_cap[100 + j][l*16 +: 16] == e, $sformatf("MIB vec %0d lane %0d", j, l));
      end
    end

    // pipelined GELU-style evaluation: 4 argument cycles, 3 per vector, and
    // the LDC, prologue/epilogue and hand-over cycles
    run_cmd(UP_GELU, 0, 512, 0, NVEC - 1, cyc);
    $display("UP_GELU: %0d vectors in %0d cycles", NVEC, cyc);
    check(cyc <= 4 + 3 * NVEC + 4, $sformatf("UP_GELU took %0d cycles", cyc));
    // published rate at VRWIDTH 256: 128 cycles per 512 elements
    check(cyc * 512 <= 128 * NVEC * N16, "UP_GELU slower than 4 elements per cycle");
    for (int j = 0; j < NVEC; j++) begin
      read_row(512 / N16 + j, row);
      for (int l = 0; l < N16; l++)
        check(row[l] == pwl_ref(x[j][l], knot, value, slope, 8),
              $sformatf("GELU vec %0d lane %0d", j, l));
    end

    run_cmd(UP_NORM, 0, 256, NVEC, NVEC, cyc);
    $display("UP_NORM: %0d vectors in %0d cycles, %0d conflict cycles", NVEC, cyc, conflicts);
    check(conflicts > 0, "strided store caused no bank conflicts");
    for (int r = 0; r < NVEC * N16 / N16; r++) begin
      read_row(256 / N16 + r, row);
      for (int b = 0; b < N16; b++) begin
        int a, j, l;
        longint s;
        a = r * N16 + b;        // element offset from 256
        j = a % NVEC; l = a / NVEC;
        s = 0;
        for (int k = 0; k < N16; k++) s += x[j][k];
        check(row[b] == 16'(norm_ref(x[j][l], s, N16)),
              $sformatf("NORM vec %0d lane %0d got %0d", j, l, $signed(row[b])));
      end
    end

    // layer normalization with a 1/sqrt table; inputs in [-64, 64)
    rsqrt_table(knot, value, slope);
    for (int t = 0; t < 3; t++) begin
      mmem_wdata = '0;
      for (int i = 0; i < PWL_SEG; i++)
        mmem_wdata[i*16 +: 16] = (t == 0) ? knot[i] : (t == 1) ? value[i] : slope[i];
      mmem_we = 1; mmem_waddr = 8'(23 + t);
      @(posedge clk); #1;
    end
    for (int r = 0; r < NVEC / VPR; r++) begin
      for (int e = 0; e < N_OUT; e++) begin
        shortint v;
        v = shortint'($urandom_range(0, 127)) - 64;
        x[r*VPR + e / N16][e % N16] = v;
        mmem_wdata[e*16 +: 16] = v;
      end
      mmem_we = 1; mmem_waddr = 8'(4 + r);
      @(posedge clk); #1;
    end
    mmem_we = 0;
    run_cmd(UP_TABLE, 23 * VPR, VPR, 0, 0, cyc);
    run_cmd(UP_LN, 4 * VPR, 768, 0, NVEC, cyc);
    $display("UP_LN: %0d vectors in %0d cycles", NVEC, cyc);
    nz = 0;
    for (int j = 0; j < NVEC; j++) begin
      shortint xv[], yv[];
      xv = new[N16];
      for (int l = 0; l < N16; l++) xv[l] = x[j][l];
      ln_ref(xv, N16, knot, value, slope, yv);
      read_row(768 / N16 + j, row);
      for (int l = 0; l < N16; l++)
        begin
          if (j == 0 && l < 4) $display("LN x=%0d y=%0d", xv[l], yv[l]);
          if (yv[l] > 16 || yv[l] < -16) nz++;
        end
      for (int l = 0; l < N16; l++)
        check(row[l] == yv[l], $sformatf("LN vec %0d lane %0d got %0d exp %0d",
                                         j, l, shortint'(row[l]), yv[l]));
    end
    check(nz > NVEC * N16 / 2, "layer normalization outputs are mostly near zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
