// tb_nvu_lsu: checks the vector load/store unit with a real NMEM and MMEM:
// unit-stride, strided and indexed stores and loads (data and cycle count),
// MMEM vector loads, and MIB activation/weight store addressing.
// Reduced size: VRWIDTH 128, 4 PEs.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_nvu_lsu;
  import npe_pkg::*;
  import npe_tb_pkg::*;
  localparam int VRWIDTH = 128, N_PE = 4, NB = VRWIDTH / 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic active, done, vrf_we;
  ulsu_t ins;
  logic [63:0] base, stride;
  logic [VRWIDTH-1:0] st_data, idx_vec, vrf_wdata;
  logic nmem_req, nmem_we, nmem_done;
  logic [NB-1:0][31:0] nmem_addr;
  logic [NB-1:0][15:0] nmem_wdata, nmem_rdata;
  logic mmem_rd_en;
  logic [15:0] mmem_raddr;
  logic [VRWIDTH-1:0] mmem_rdata;
  logic mib_we, mib_wsel;
  logic [1:0] mib_bank;
  logic [15:0] mib_addr;
  logic [VRWIDTH-1:0] mib_wdata;

  nvu_lsu #(.VRWIDTH(VRWIDTH), .N_PE(N_PE)) dut (.*);

  logic c1, c2, mwu_gnt, mwu_rvalid;
  logic [NB-1:0][15:0] mwu_rdata;
  nmem #(.VRWIDTH(VRWIDTH), .DEPTH(32)) u_nmem (
    .clk, .rst_n, .lsu_req (nmem_req), .lsu_we (nmem_we), .lsu_addr (nmem_addr),
    .lsu_wdata (nmem_wdata), .lsu_done (nmem_done), .lsu_rdata (nmem_rdata),
    .lsu_conflict (c1), .lsu_wait (c2), .mwu_req (1'b0), .mwu_row (5'd0),
    .mwu_gnt, .mwu_rvalid, .mwu_rdata);

  logic mm_we;
  logic [2:0] mm_waddr;
  logic [4*16*4-1:0] mm_wdata;
  mmem #(.N_OUT(16), .VRWIDTH(VRWIDTH), .DEPTH(8)) u_mmem (
    .clk, .we (mm_we), .waddr (mm_waddr), .wdata (mm_wdata),
    .rd_en (mmem_rd_en), .raddr (mmem_raddr), .rdata (mmem_rdata));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [15:0] mdl [32*NB];
  logic [255:0] mmrow [8];

  // run one LSU operation; returns cycles and loaded data
  task automatic op(ulsu_t i, output int cyc, output logic [VRWIDTH-1:0] ld);
    @(negedge clk); active = 1; ins = i; #1;
    cyc = 1;
    while (!done) begin @(negedge clk); #1; cyc++; end
    ld = vrf_wdata;
    chk(vrf_we == (i.op inside {L_LD_MMEM, L_LD_NMEM, L_LDS, L_LDX}), "vrf_we only on loads");
    @(posedge clk); #1 active = 0;
  endtask

  int cyc;
  logic [VRWIDTH-1:0] ld, v;
  initial begin
    active = 0; ins = '0; base = 0; stride = 0; st_data = 0; idx_vec = 0; mm_we = 0; mm_waddr = 0; mm_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // MMEM rows
    for (int r = 0; r < 8; r++) begin
      @(negedge clk); mm_we = 1; mm_waddr = 3'(r);
      mm_wdata = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      mmrow[r] = mm_wdata;
    end
    @(negedge clk); mm_we = 0;
    // unit-stride stores fill NMEM rows 0..7 (base register value + offset)
    for (int r = 0; r < 8; r++) begin
      base = 64'(r * NB - 3); st_data = {$urandom, $urandom, $urandom, $urandom};
      op(lop(L_ST_NMEM, 1, 2, 3), cyc, ld);
      chk(cyc == 1, "unit store 1 cycle");
      for (int l = 0; l < NB; l++) mdl[r * NB + l] = st_data[l*16 +: 16];
    end
    base = 64'(NB + 2);
    op(lop(L_LD_NMEM, 1, 2, 0), cyc, ld);
    chk(cyc == 2, "unit load 2 cycles");
    for (int l = 0; l < NB; l++) chk(ld[l*16 +: 16] == mdl[NB + 2 + l], "unit load data");
    // strided load, stride 3 (odd: conflict-free on 8 banks)
    base = 1; stride = 3;
    op(lop(L_LDS, 1, 2, 0, 4), cyc, ld);
    chk(cyc == 2, "stride-3 load without conflicts");
    for (int l = 0; l < NB; l++) chk(ld[l*16 +: 16] == mdl[1 + 3 * l], "strided load data");
    // strided store, stride 4 (4 lanes per 2 banks -> 4 cycles)
    base = 0; stride = 4; st_data = {$urandom, $urandom, $urandom, $urandom};
    op(lop(L_STS, 1, 2, 0, 4), cyc, ld);
    chk(cyc == 4, $sformatf("stride-4 store in 4 cycles (%0d)", cyc));
    for (int l = 0; l < NB; l++) mdl[4 * l] = st_data[l*16 +: 16];
    // indexed load
    base = 5;
    for (int l = 0; l < NB; l++) idx_vec[l*16 +: 16] = 16'($urandom % 59);   // stay inside the written rows
    op(lop(L_LDX, 1, 2, 0, 0, 7), cyc, ld);
    for (int l = 0; l < NB; l++) chk(ld[l*16 +: 16] == mdl[5 + idx_vec[l*16 +: 16]], "indexed load data");
    // indexed store then unit load
    base = 128;
    for (int l = 0; l < NB; l++) idx_vec[l*16 +: 16] = 16'(NB - 1 - l);
    st_data = {$urandom, $urandom, $urandom, $urandom};
    op(lop(L_STX, 1, 2, 0, 0, 7), cyc, ld);
    op(lop(L_LD_NMEM, 1, 2, 0), cyc, ld);
    for (int l = 0; l < NB; l++) chk(ld[l*16 +: 16] == st_data[(NB - 1 - l)*16 +: 16], "indexed store reverses");
    // MMEM loads (vector address: row*2 + half)
    for (int vv = 0; vv < 16; vv++) begin
      base = 64'(vv);
      op(lop(L_LD_MMEM, 1, 2, 0), cyc, ld);
      chk(cyc == 2 && ld == mmrow[vv / 2][(vv % 2) * VRWIDTH +: VRWIDTH], $sformatf("mmem vector %0d", vv));
    end
    // MIB stores: activation word 9; weight linear address 4*3+2 -> bank 2, word 3
    st_data = {$urandom, $urandom, $urandom, $urandom};
    base = 9;
    @(negedge clk); active = 1; ins = lop(L_ST_ACT, 1, 2, 0); #1;
    chk(done && mib_we && !mib_wsel && mib_addr == 9 && mib_wdata == st_data, "MIB activation store");
    @(negedge clk); base = 14; ins = lop(L_ST_W, 1, 2, 0); #1;
    chk(done && mib_we && mib_wsel && mib_bank == 2 && mib_addr == 3, "MIB weight store");
    @(negedge clk); active = 0; #1;
    chk(!mib_we, "no MIB write when idle");
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
