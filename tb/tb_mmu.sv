// tb_mmu: checks the matrix multiply unit against an integer reference
// model, with a behavioural MIB (synchronous read) and MMEM capture.
// Two instances: the 16-bit MMU and the 8-bit MMU (two products per
// multiplier slot). Checks results after rounding/saturating quantization,
// the issue rate (one step per cycle: a command of R rows and K steps takes
// R*K + 5 cycles) and back-to-back commands. Reduced size: 8 PEs.
//
// The 2048-multiply-per-cycle rate and the 8-bit two-products-per-multiplier
// mode follow the published design; the rows*k_steps+5 latency and the
// rounding rule checked here are this design's own.
module tb_mmu;
  import npe_pkg::*;
  import npe_tb_pkg::*;
  localparam int N_PE = 8, L = 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------- shared behavioural MIB contents (raw words)
  logic [EXT_W-1:0] act_mem [64];
  logic [EXT_W-1:0] w_mem [N_PE][16];
  logic [15:0] mm16 [16][N_PE];
  logic [15:0] mm8  [16][2*N_PE];
  int wr16 = 0, wr8 = 0;

  // ---------- 16-bit instance
  logic cv16, cr16, busy16, rd16, we16;
  mmu_cmd_t c16;
  logic [5:0] aa16; logic [3:0] wa16, wad16;
  logic [L*16-1:0] act16;
  logic [N_PE-1:0][EXT_W-1:0] w16;
  logic [N_PE*16-1:0] wd16;
  mmu #(.N_PE(N_PE), .PE_LANES(L), .DW(16), .ACT_DEPTH(64), .W_DEPTH(16), .MMEM_DEPTH(16)) u16 (
    .clk, .rst_n, .cmd_valid (cv16), .cmd_ready (cr16), .cmd (c16), .busy (busy16),
    .mib_rd_en (rd16), .mib_act_addr (aa16), .mib_w_addr (wa16), .mib_act (act16), .mib_w (w16),
    .mmem_we (we16), .mmem_waddr (wad16), .mmem_wdata (wd16));
  always @(posedge clk) if (rd16) begin
    act16 <= act_mem[aa16];
    for (int p = 0; p < N_PE; p++) w16[p] <= w_mem[p][wa16];
  end
  always @(posedge clk) if (rst_n && we16) begin
    wr16++;
    for (int n = 0; n < N_PE; n++) mm16[wad16][n] <= wd16[n*16 +: 16];
  end

  // ---------- 8-bit instance
  logic cv8, cr8, busy8, rd8, we8;
  mmu_cmd_t c8;
  logic [5:0] aa8; logic [3:0] wa8, wad8;
  logic [L*8-1:0] act8;
  logic [N_PE-1:0][EXT_W-1:0] w8;
  logic [2*N_PE*16-1:0] wd8;
  mmu #(.N_PE(N_PE), .PE_LANES(L), .DW(8), .ACT_DEPTH(64), .W_DEPTH(16), .MMEM_DEPTH(16)) u8 (
    .clk, .rst_n, .cmd_valid (cv8), .cmd_ready (cr8), .cmd (c8), .busy (busy8),
    .mib_rd_en (rd8), .mib_act_addr (aa8), .mib_w_addr (wa8), .mib_act (act8), .mib_w (w8),
    .mmem_we (we8), .mmem_waddr (wad8), .mmem_wdata (wd8));
  always @(posedge clk) if (rd8) begin
    act8 <= act_mem[aa8][L*8-1:0];
    for (int p = 0; p < N_PE; p++) w8[p] <= w_mem[p][wa8];
  end
  always @(posedge clk) if (rst_n && we8) begin
    wr8++;
    for (int n = 0; n < 2 * N_PE; n++) mm8[wad8][n] <= wd8[n*16 +: 16];
  end

  function automatic longint q16(longint acc, int sh);
    if (sh != 0) acc = (acc + (64'sd1 <<< (sh - 1))) >>> sh;
    return sat(acc, 16);
  endfunction

  // reference: out[r][n] for a command
  task automatic check16(mmu_cmd_t c);
    for (int r = 0; r < c.rows; r++)
      for (int n = 0; n < N_PE; n++) begin
        longint acc = 0;
        for (int k = 0; k < c.k_steps; k++)
          for (int l = 0; l < L; l++)
            acc += longint'($signed(act_mem[c.act_base + r * c.act_stride + k][l*16 +: 16])) *
                   longint'($signed(w_mem[n][c.w_base + k][l*16 +: 16]));
        chk(longint'($signed(mm16[c.out_base + r][n])) == q16(acc, c.qshift),
            $sformatf("16-bit r%0d n%0d got %0d exp %0d", r, n, $signed(mm16[c.out_base + r][n]), q16(acc, c.qshift)));
      end
  endtask

  task automatic check8(mmu_cmd_t c);
    for (int r = 0; r < c.rows; r++)
      for (int n = 0; n < 2 * N_PE; n++) begin
        longint acc = 0;
        for (int k = 0; k < c.k_steps; k++)
          for (int l = 0; l < L; l++)
            acc += longint'($signed(act_mem[c.act_base + r * c.act_stride + k][l*8 +: 8])) *
                   longint'($signed(w_mem[n / 2][c.w_base + k][((n % 2) * L + l)*8 +: 8]));
        chk(longint'($signed(mm8[c.out_base + r][n])) == q16(acc, c.qshift),
            $sformatf("8-bit r%0d n%0d", r, n));
      end
  endtask

  task automatic run(ref logic cv, ref mmu_cmd_t cc, input mmu_cmd_t c, output int cyc);
    @(negedge clk); cv = 1; cc = c;
    @(negedge clk); cv = 0;
    cyc = 1;
    while (busy16 || busy8) begin @(negedge clk); cyc++; end
  endtask

  mmu_cmd_t c;
  int cyc;
  initial begin
    cv16 = 0; cv8 = 0; c16 = '0; c8 = '0;
    for (int i = 0; i < 64; i++) for (int j = 0; j < 8; j++) act_mem[i][j*32 +: 32] = $urandom;
    for (int p = 0; p < N_PE; p++) for (int i = 0; i < 16; i++)
      for (int j = 0; j < 8; j++) w_mem[p][i][j*32 +: 32] = $urandom;
    repeat (2) @(negedge clk); rst_n = 1;
    // 16-bit: 4 rows, 3 steps (K = 48), shift 18
    c = '{qshift: 6'd18, out_base: 16'd2, act_stride: 16'd3, rows: 16'd4, k_steps: 16'd3, w_base: 16'd1, act_base: 16'd5};
    run(cv16, c16, c, cyc);
    chk(cyc == 4 * 3 + 5, $sformatf("16-bit cycle count %0d", cyc));
    check16(c);
    // saturation: no shift makes most outputs clip
    c = '{qshift: 6'd0, out_base: 16'd8, act_stride: 16'd1, rows: 16'd2, k_steps: 16'd2, w_base: 16'd0, act_base: 16'd0};
    run(cv16, c16, c, cyc);
    check16(c);
    // 8-bit: 3 rows, 4 steps
    c = '{qshift: 6'd6, out_base: 16'd1, act_stride: 16'd4, rows: 16'd3, k_steps: 16'd4, w_base: 16'd2, act_base: 16'd7};
    run(cv8, c8, c, cyc);
    chk(cyc == 3 * 4 + 5, $sformatf("8-bit cycle count %0d", cyc));
    check8(c);
    chk(wr16 == 6 && wr8 == 3, "one MMEM write per output row");
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
