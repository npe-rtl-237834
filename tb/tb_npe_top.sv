// tb_npe_top - end-to-end, full-size test of the NPE overlay.
//
// The top level is instantiated with its default parameters (128 PEs of
// 16 MACs, 16-bit data, 1024-bit vector registers) and connected to a
// behavioural external memory with random back-pressure.  The memory holds
// an instruction program, the NVU microprograms, the PWL table, two weight
// matrices and an input matrix.  The program runs a small transformer-like
// sequence:
//   1. MRU: microcode, PWL table rows, identity weights, input A, weights W1
//   2. MMU: table rows through an identity matrix into MMEM (this is how
//      constants reach the NVU), then H1 = A x W1
//   3. NVU: load the PWL table, G = PWL(H1) to NMEM and back to the MIB as
//      the next activations; meanwhile the MRU loads W2
//   4. MWU writes G to external memory while the MMU computes H2 = G x W2
//   5. NVU: Y = H2 - mean(H2) per vector, stored transposed (stride 8) to
//      NMEM while the MWU is still draining G, then the MWU writes Y out.
// G and Y in external memory are compared with a reference model.  The
// testbench also counts every mechanism the design relies on (SYNC waits,
// MPC stalls, NMEM bank conflicts, NMEM arbitration waits, memory
// back-pressure, NVU writes into the MIB, overlap of MRU and NVU work) and
// fails any that never occurred, and checks the MMU cycle count of
// rows x k_steps + 5 per command (one 2048-MAC step per cycle).
//
// The unit set, the data flow and the overlap of units follow the published
// design; the program, microprograms, memory map and data are this
// testbench's own.
`timescale 1ns/1ps
module tb_npe_top;
  import npe_pkg::*;
  import npe_tb_pkg::*;

  localparam int N_PE   = 128;
  localparam int VRW    = 1024;
  localparam int N16    = VRW / 16;          // elements per vector
  localparam int VPR    = N_PE * 16 / VRW;   // vectors per MMEM row
  localparam int R      = 4;                 // rows (tokens)
  localparam int K1     = 2;                 // k-steps of the first matmul
  localparam int K2     = N_PE / 16;         // k-steps of the second matmul
  localparam int NVEC   = R * VPR;
  localparam int BEATS  = VRW / EXT_W;
  // external memory map (256-bit words)
  localparam int A_PROG = 0, A_UC = 64, A_TBL = 128, A_ID = 160, A_A = 320,
                 A_W1 = 384, A_W2 = 640, A_G = 2048, A_Y = 2200;

  logic clk = 0, rst_n = 1, start = 0, done;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #2.5 clk = ~clk;   // 200 MHz

  logic rq_v, rq_r, rs_v, wr_v, wr_r;
  logic [31:0] rq_a, wr_a;
  logic [EXT_W-1:0] rs_d, wr_d;
  logic [15:0] prog_len;

  npe_top dut (
    .clk, .rst_n, .start, .prog_addr(32'(A_PROG)), .prog_len, .done,
    .ext_rd_req_valid(rq_v), .ext_rd_req_ready(rq_r), .ext_rd_addr(rq_a),
    .ext_rd_resp_valid(rs_v), .ext_rd_resp_data(rs_d),
    .ext_wr_valid(wr_v), .ext_wr_ready(wr_r), .ext_wr_addr(wr_a), .ext_wr_data(wr_d));

  ext_mem_model #(.DEPTH(4096), .LAT(6), .STALLS(1'b1)) u_mem (
    .clk, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_data(rs_d),
    .wr_valid(wr_v), .wr_ready(wr_r), .wr_addr(wr_a), .wr_data(wr_d));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #5_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // mechanism counters
  int n_sync = 0, n_stall = 0, n_conf = 0, n_arb = 0, n_mibw = 0, n_overlap = 0;
  int n_mmu_busy = 0, n_mmem_rows = 0, cycles = 0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.sync_wait)    n_sync++;
    if (dut.nvu_stall)    n_stall++;
    if (dut.lsu_conflict) n_conf++;
    if (dut.lsu_wait)     n_arb++;
    if (dut.nvu_mib_we)   n_mibw++;
    if (dut.mmem_we)      n_mmem_rows++;
    if (dut.u_icu.unit_busy[U_MMU]) n_mmu_busy++;
    if (dut.u_icu.unit_busy[U_MRU] && dut.u_icu.unit_busy[U_NVU]) n_overlap++;
  end

  shortint knot[PWL_SEG], value[PWL_SEG], slope[PWL_SEG];
  shortint A [R][K1*16];
  shortint W1 [K1*16][N_PE];
  shortint W2 [K2*16][N_PE];
  shortint H1 [R][N_PE], G [R][N_PE], H2 [R][N_PE], Y [R][N_PE];
  ubundle_t uc [UP_LEN];
  icu_instr_t prog [$];

  function automatic shortint q16(longint acc, int sh);
    if (sh != 0) acc = (acc + (64'sd1 <<< (sh - 1))) >>> sh;
    return shortint'(sat(acc, 16));
  endfunction

  localparam int Q1 = 10, Q2 = 12;

  initial begin
    logic [EXT_W-1:0] w;
    // ---------------- data ----------------
    sqrt_table(knot, value, slope);
    build_ucode(N16, VRW / 256, uc);
    for (int r = 0; r < R; r++)
      for (int k = 0; k < K1 * 16; k++) A[r][k] = shortint'($urandom_range(0, 512)) - 256;
    for (int k = 0; k < K1 * 16; k++)
      for (int n = 0; n < N_PE; n++) W1[k][n] = shortint'($urandom_range(0, 512)) - 256;
    for (int k = 0; k < K2 * 16; k++)
      for (int n = 0; n < N_PE; n++) W2[k][n] = shortint'($urandom_range(0, 128)) - 64;
    // reference
    for (int r = 0; r < R; r++)
      for (int n = 0; n < N_PE; n++) begin
        longint acc; acc = 0;
        for (int k = 0; k < K1 * 16; k++) acc += longint'(A[r][k]) * W1[k][n];
        H1[r][n] = q16(acc, Q1);
        G[r][n]  = pwl_ref(H1[r][n], knot, value, slope, 8);
      end
    for (int r = 0; r < R; r++)
      for (int n = 0; n < N_PE; n++) begin
        longint acc; acc = 0;
        for (int k = 0; k < K2 * 16; k++) acc += longint'(G[r][k]) * W2[k][n];
        H2[r][n] = q16(acc, Q2);
      end
    for (int r = 0; r < R; r++)
      for (int v = 0; v < VPR; v++) begin
        longint s; s = 0;
        for (int l = 0; l < N16; l++) s += H2[r][v*N16 + l];
        for (int l = 0; l < N16; l++) Y[r][v*N16 + l] = norm_ref(H2[r][v*N16 + l], s, N16);
      end

    // ---------------- external memory image ----------------
    for (int i = 0; i < UP_LEN; i++) u_mem.mem[A_UC + i] = EXT_W'(uc[i]);
    for (int t = 0; t < 3; t++) begin
      w = '0;
      for (int i = 0; i < PWL_SEG; i++)
        w[i*16 +: 16] = (t == 0) ? knot[i] : (t == 1) ? value[i] : slope[i];
      u_mem.mem[A_TBL + t] = w;
    end
    for (int b = 0; b < N_PE; b++) begin          // identity on the first 16 inputs
      w = '0;
      if (b < 16) w[b*16 +: 16] = 16'd1;
      u_mem.mem[A_ID + b] = w;
    end
    for (int r = 0; r < R; r++)
      for (int ks = 0; ks < K1; ks++) begin
        for (int l = 0; l < 16; l++) w[l*16 +: 16] = A[r][ks*16 + l];
        u_mem.mem[A_A + r * K1 + ks] = w;
      end
    for (int ks = 0; ks < K1; ks++)
      for (int b = 0; b < N_PE; b++) begin
        for (int l = 0; l < 16; l++) w[l*16 +: 16] = W1[ks*16 + l][b];
        u_mem.mem[A_W1 + ks * N_PE + b] = w;
      end
    for (int ks = 0; ks < K2; ks++)
      for (int b = 0; b < N_PE; b++) begin
        for (int l = 0; l < 16; l++) w[l*16 +: 16] = W2[ks*16 + l][b];
        u_mem.mem[A_W2 + ks * N_PE + b] = w;
      end

    // ---------------- program ----------------
    prog.push_back(ins_mru(D_UCODE,   A_UC,  UP_LEN, 0));
    prog.push_back(ins_mru(D_MIB_ACT, A_TBL, 3, 60));
    prog.push_back(ins_mru(D_MIB_W,   A_ID,  N_PE, 20));
    prog.push_back(ins_mru(D_MIB_ACT, A_A,   R * K1, 0));
    prog.push_back(ins_mru(D_MIB_W,   A_W1,  K1 * N_PE, 0));
    prog.push_back(ins_sync(1 << U_MRU));
    prog.push_back(ins_mmu(60, 20, 1, 3, 1, 40, 0));          // table -> MMEM rows 40..42
    prog.push_back(ins_mmu(0, 0, K1, R, K1, 0, Q1));           // H1 -> MMEM rows 0..R-1
    prog.push_back(ins_sync(1 << U_MMU));
    prog.push_back(ins_nvu(UP_TABLE, 40 * VPR, VPR));
    prog.push_back(ins_nvu(UP_PWL, 0, 0, 100, NVEC));         // G -> NMEM 0.., MIB act 100..
    prog.push_back(ins_mru(D_MIB_W,   A_W2,  K2 * N_PE, 2));  // overlaps the NVU
    prog.push_back(ins_sync((1 << U_MRU) | (1 << U_NVU)));
    prog.push_back(ins_mmu(100, 2, K2, R, K2, 10, Q2));        // H2 -> MMEM rows 10..
    prog.push_back(ins_sync(1 << U_MMU));
    prog.push_back(ins_mwu(0, NVEC, A_G));                     // G out, overlaps UP_NORM
    prog.push_back(ins_nvu(UP_NORM, 10 * VPR, 1024, NVEC, NVEC));
    prog.push_back(ins_sync((1 << U_NVU) | (1 << U_MWU)));
    prog.push_back(ins_mwu(1024 / N16, NVEC, A_Y));
    prog.push_back(ins_sync(1 << U_MWU));
    prog.push_back(ins_end());
    foreach (prog[i]) u_mem.mem[A_PROG + i] = EXT_W'(prog[i]);
    prog_len = 16'(prog.size());

    // ---------------- run ----------------
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
    $display("run: %0d cycles (%0.1f us at 200 MHz)", cycles, cycles / 200.0);

    // ---------------- results ----------------
    for (int j = 0; j < NVEC; j++)
      for (int b = 0; b < BEATS; b++)
        for (int i = 0; i < EXT_W / 16; i++) begin
          int e, r, n;
          e = j * N16 + b * (EXT_W / 16) + i;
          r = e / N_PE; n = e % N_PE;
          check(u_mem.mem[A_G + j * BEATS + b][i*16 +: 16] == G[r][n],
                $sformatf("G[%0d][%0d]", r, n));
        end
    // Y stored transposed: element l of vector j at offset j + NVEC*l
    for (int j = 0; j < NVEC; j++)
      for (int b = 0; b < BEATS; b++)
        for (int i = 0; i < EXT_W / 16; i++) begin
          int a, vj, l, r, n;
          a = j * N16 + b * (EXT_W / 16) + i;
          vj = a % NVEC; l = a / NVEC;
          r = vj / VPR; n = (vj % VPR) * N16 + l;
          check(u_mem.mem[A_Y + j * BEATS + b][i*16 +: 16] == Y[r][n],
                $sformatf("Y[%0d][%0d]", r, n));
        end
    check(u_mem.writes == 2 * NVEC * BEATS, $sformatf("%0d external writes", u_mem.writes));

    // ---------------- mechanisms and rates ----------------
    $display("sync waits %0d, MPC stalls %0d, bank conflicts %0d, arbitration waits %0d",
             n_sync, n_stall, n_conf, n_arb);
    $display("read stalls %0d, write stalls %0d, NVU->MIB writes %0d, MRU/NVU overlap %0d",
             u_mem.rd_stalls, u_mem.wr_stalls, n_mibw, n_overlap);
    $display("MMU busy %0d cycles for %0d MMEM rows", n_mmu_busy, n_mmem_rows);
    check(n_sync > 0, "no SYNC wait happened");
    check(n_stall > 0, "no MPC stall happened");
    check(n_conf > 0, "no NMEM bank conflict happened");
    check(n_arb > 0, "no NMEM arbitration wait happened");
    check(u_mem.rd_stalls > 0, "no read back-pressure happened");
    check(u_mem.wr_stalls > 0, "no write back-pressure happened");
    check(n_mibw == NVEC, "NVU wrote the MIB the wrong number of times");
    check(n_overlap > 0, "MRU and NVU never worked at the same time");
    check(n_mmem_rows == 3 + 2 * R, "MMEM row count");
    // three MMU commands, each rows x k_steps + 5 cycles
    check(n_mmu_busy <= (3 * 1 + 5) + (R * K1 + 5) + (R * K2 + 5),
          $sformatf("MMU busy %0d cycles", n_mmu_busy));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
