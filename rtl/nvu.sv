// nvu: nonlinear vector unit.
//
// A small vector processor for the nonlinear steps of transformer models
// (softmax, layer normalisation, GELU, ...). Instructions from the
// instruction control unit wait in the instruction buffer; the
// microprogram controller expands each into VLIW bundles held in the
// microprogram memory. Each bundle drives, in the same cycle, the
// load/store unit (VRF <-> NMEM / MMEM / MIB), the three slots of the
// vector compute unit (operands from the vector register file, or a
// broadcast scalar from the scalar register file; results to the VRF, or
// reductions to the SRF) and the scalar compute unit (SRF -> SRF). The
// block structure and connections follow the published NVU; NMEM sits
// outside this module and is reached through the nmem_* port.
//
// Register file ports:
//   VRF read  0/1 va operands, 2/3 vm operands, 4/5 vn operands,
//             6 store data, 7 index vector;
//   VRF write 0 va, 1 vm, 2 vn, 3 load data (highest wins);
//   SRF read  0..2 scalar operands of va/vm/vn, 3/4 SCU operands,
//             5/6 load/store base and stride, 7 loop-counter load;
//   SRF write 0 instruction arguments, 1 vn reduction, 2 SCU.
// Timing: see mpc (one bundle per cycle unless held by a load/store).
module nvu
  import npe_pkg::*;
#(
  parameter int VRWIDTH = 1024,
  parameter int N_VREG  = 32,
  parameter int N_PE    = 128,
  parameter int UDEPTH  = 512,
  localparam int NB     = VRWIDTH / 16,
  localparam int BW     = $clog2(N_PE),
  localparam int UAW    = $clog2(UDEPTH),
  localparam int VW     = $clog2(N_VREG)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // instructions from the ICU
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  nvu_cmd_t               cmd,
  output logic                   busy,
  // microprogram load (from the MRU)
  input  logic                   ucode_we,
  input  logic [UAW-1:0]         ucode_waddr,
  input  ubundle_t               ucode_wdata,
  // NMEM
  output logic                   nmem_req,
  output logic                   nmem_we,
  output logic [NB-1:0][31:0]    nmem_addr,
  output logic [NB-1:0][15:0]    nmem_wdata,
  input  logic                   nmem_done,
  input  logic [NB-1:0][15:0]    nmem_rdata,
  // MMEM read
  output logic                   mmem_rd_en,
  output logic [15:0]            mmem_raddr,
  input  logic [VRWIDTH-1:0]     mmem_rdata,
  // MIB write
  output logic                   mib_we,
  output logic                   mib_wsel,
  output logic [BW-1:0]          mib_bank,
  output logic [15:0]            mib_addr,
  output logic [VRWIDTH-1:0]     mib_wdata,
  // activity (for performance counting)
  output logic                   stall
);
  // ---------------- instruction buffer + controller
  logic      q_valid, q_ready, mpc_busy, run, commit, lsu_done;
  nvu_cmd_t  q_cmd;
  ubundle_t  b;
  logic [UAW-1:0] upc;
  logic        arg_we;
  logic [4:0]  arg_waddr;
  logic [63:0] arg_wdata;

  nvu_ibuf u_ibuf (
    .clk, .rst_n,
    .in_valid (cmd_valid), .in_ready (cmd_ready), .in_cmd (cmd),
    .out_valid (q_valid), .out_ready (q_ready), .out_cmd (q_cmd)
  );

  logic [7:0][63:0] srd;
  logic [7:0][4:0]  sra;

  mpc #(.UDEPTH(UDEPTH)) u_mpc (
    .clk, .rst_n,
    .cmd_valid (q_valid), .cmd_ready (q_ready), .cmd (q_cmd),
    .busy (mpc_busy), .upc (upc), .bundle (b),
    .run (run), .lsu_done (lsu_done), .commit (commit), .stall (stall),
    .ctrl_sval (srd[7]),
    .arg_we (arg_we), .arg_waddr (arg_waddr), .arg_wdata (arg_wdata)
  );

  assign busy = mpc_busy || q_valid;

  ucode_mem #(.DEPTH(UDEPTH)) u_ucode (
    .clk, .we (ucode_we), .waddr (ucode_waddr), .wdata (ucode_wdata),
    .raddr (upc), .rdata (b)
  );

  // ---------------- register files
  logic [7:0][VW-1:0]       vra;
  logic [7:0][VRWIDTH-1:0]  vrd;
  logic [3:0]               vwe;
  logic [3:0][VW-1:0]       vwa;
  logic [3:0][VRWIDTH-1:0]  vwd;

  assign vra = {VW'(b.lsu.idx), VW'(b.lsu.vreg), VW'(b.vn.src2), VW'(b.vn.src1),
                VW'(b.vm.src2), VW'(b.vm.src1), VW'(b.va.src2), VW'(b.va.src1)};

  vrf #(.N_VREG(N_VREG), .VRWIDTH(VRWIDTH), .N_RD(8), .N_WR(4)) u_vrf (
    .clk, .rst_n, .raddr (vra), .rdata (vrd), .we (vwe), .waddr (vwa), .wdata (vwd)
  );

  logic [2:0]        swe;
  logic [2:0][4:0]   swa;
  logic [2:0][63:0]  swd;

  assign sra = {b.ctrl.sreg, b.lsu.stride, b.lsu.base, b.scu.src2, b.scu.src1,
                b.vn.sreg, b.vm.sreg, b.va.sreg};

  srf #(.N_SREG(32), .N_RD(8), .N_WR(3)) u_srf (
    .clk, .rst_n, .raddr (sra), .rdata (srd), .we (swe), .waddr (swa), .wdata (swd)
  );

  // ---------------- compute units
  logic a_we, m_we, n_we, n_swe, s_we;
  logic [VRWIDTH-1:0] a_res, m_res, n_res;
  logic [63:0] n_sres, s_res;
  logic [PWL_SEG-1:0][15:0] tk, tv, ts;

  vcu #(.VRWIDTH(VRWIDTH)) u_vcu (
    .clk, .rst_n, .commit (commit),
    .ia (b.va), .im (b.vm), .in_ (b.vn),
    .a_a (vrd[0]), .a_b (vrd[1]), .m_a (vrd[2]), .m_b (vrd[3]), .n_a (vrd[4]), .n_b (vrd[5]),
    .a_s (srd[0]), .m_s (srd[1]), .n_s (srd[2]),
    .a_we, .m_we, .n_we, .n_swe, .a_res, .m_res, .n_res, .n_sres,
    .tbl_knot (tk), .tbl_value (tv), .tbl_slope (ts)
  );

  scu u_scu (
    .commit (commit), .ins (b.scu), .a (srd[3]), .b_reg (srd[4]),
    .tbl_knot (tk), .tbl_value (tv), .tbl_slope (ts),
    .we (s_we), .res (s_res)
  );

  // ---------------- load/store unit
  logic              l_vwe;
  logic [VRWIDTH-1:0] l_vwd;

  nvu_lsu #(.VRWIDTH(VRWIDTH), .N_PE(N_PE)) u_lsu (
    .clk, .rst_n, .active (run), .ins (b.lsu),
    .base (srd[5]), .stride (srd[6]), .st_data (vrd[6]), .idx_vec (vrd[7]),
    .done (lsu_done), .vrf_we (l_vwe), .vrf_wdata (l_vwd),
    .nmem_req, .nmem_we, .nmem_addr, .nmem_wdata, .nmem_done, .nmem_rdata,
    .mmem_rd_en, .mmem_raddr, .mmem_rdata,
    .mib_we, .mib_wsel, .mib_bank, .mib_addr, .mib_wdata
  );

  // ---------------- write-back
  assign vwe = {l_vwe, n_we, m_we, a_we};
  assign vwa = {VW'(b.lsu.vreg), VW'(b.vn.dst), VW'(b.vm.dst), VW'(b.va.dst)};
  assign vwd = {l_vwd, n_res, m_res, a_res};

  assign swe = {s_we, n_swe, arg_we};
  assign swa = {b.scu.dst, b.vn.dst, arg_waddr};
  assign swd = {s_res, n_sres, arg_wdata};
endmodule
