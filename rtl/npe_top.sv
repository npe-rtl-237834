// npe_top: NPE, an overlay processor for transformer (NLP) inference.
//
// Connects the units of the published architecture:
//   ICU  - runs the program and dispatches commands to the other units;
//   MRU  - external memory -> MIB, ICU instruction memory, NVU microcode;
//   MIB  - MMU input buffer (activations and per-PE weight banks);
//   MMU  - N_PE x PE_LANES multipliers, accumulation, 16-bit quantization;
//   MMEM - MMU scratchpad, holds MMU results for the NVU;
//   NVU  - nonlinear vector unit, reads MMEM, works in NMEM, writes results
//          back to the MIB (for the next matrix multiply) or to NMEM;
//   NMEM - NVU scratchpad with an arbitrated read port for the MWU;
//   MWU  - NMEM -> external memory.
// The external memory interface (memory controller and DRAM) is outside
// this design: its read channel (request/response) and write channel
// (valid/ready) are ports of this module. All units run concurrently; the
// program orders them with SYNC instructions. Port and parameter defaults
// follow the published main configuration where it gives one (128 PEs of 16
// multipliers, 16-bit MMU, NVU with 1024-bit vector registers); memory
// depths are this design's choices.
module npe_top
  import npe_pkg::*;
#(
  parameter int N_PE       = 128,
  parameter int PE_LANES   = 16,
  parameter int DW         = 16,
  parameter int VRWIDTH    = 1024,
  parameter int ACT_DEPTH  = 1024,
  parameter int W_DEPTH    = 256,
  parameter int MMEM_DEPTH = 256,
  parameter int NMEM_DEPTH = 512,
  parameter int UDEPTH     = 512,
  parameter int IMEM_DEPTH = 256,
  localparam int NO        = (DW == 8) ? 2 : 1,
  localparam int N_OUT     = N_PE * NO,
  localparam int NB        = VRWIDTH / 16,
  localparam int BW        = $clog2(N_PE),
  localparam int ACT_W     = PE_LANES * DW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [31:0]       prog_addr,
  input  logic [15:0]       prog_len,
  output logic              done,
  // external memory read channel
  output logic              ext_rd_req_valid,
  input  logic              ext_rd_req_ready,
  output logic [31:0]       ext_rd_addr,
  input  logic              ext_rd_resp_valid,
  input  logic [EXT_W-1:0]  ext_rd_resp_data,
  // external memory write channel
  output logic              ext_wr_valid,
  input  logic              ext_wr_ready,
  output logic [31:0]       ext_wr_addr,
  output logic [EXT_W-1:0]  ext_wr_data
);
  // ---------------- ICU
  logic       mru_v, mru_r, mmu_v, mmu_r, nvu_v, nvu_r, mwu_v, mwu_r, sync_wait;
  mru_cmd_t   mru_c;
  mmu_cmd_t   mmu_c;
  nvu_cmd_t   nvu_c;
  mwu_cmd_t   mwu_c;
  logic       mru_busy, mmu_busy, nvu_busy, mwu_busy;
  logic       imem_we, ucode_we;
  logic [15:0] mru_dst_addr;
  logic [EXT_W-1:0] mru_wdata;

  icu #(.IMEM_DEPTH(IMEM_DEPTH)) u_icu (
    .clk, .rst_n, .start, .prog_addr, .prog_len, .done,
    .imem_we (imem_we), .imem_waddr (mru_dst_addr), .imem_wdata (mru_wdata),
    .unit_busy ({mwu_busy, nvu_busy, mmu_busy, mru_busy}),
    .mru_valid (mru_v), .mru_ready (mru_r), .mru_cmd (mru_c),
    .mmu_valid (mmu_v), .mmu_ready (mmu_r), .mmu_cmd (mmu_c),
    .nvu_valid (nvu_v), .nvu_ready (nvu_r), .nvu_cmd (nvu_c),
    .mwu_valid (mwu_v), .mwu_ready (mwu_r), .mwu_cmd (mwu_c),
    .sync_wait (sync_wait)
  );

  // ---------------- MRU
  logic            mru_mib_we, mru_mib_wsel;
  logic [BW-1:0]   mru_mib_bank;
  logic [15:0]     mru_mib_addr;

  mru #(.N_PE(N_PE), .PE_LANES(PE_LANES), .DW(DW)) u_mru (
    .clk, .rst_n, .cmd_valid (mru_v), .cmd_ready (mru_r), .cmd (mru_c), .busy (mru_busy),
    .ext_rd_req_valid, .ext_rd_req_ready, .ext_rd_addr, .ext_rd_resp_valid, .ext_rd_resp_data,
    .mib_we (mru_mib_we), .mib_wsel (mru_mib_wsel), .mib_bank (mru_mib_bank), .mib_addr (mru_mib_addr),
    .ucode_we (ucode_we), .imem_we (imem_we), .dst_addr (mru_dst_addr), .wdata (mru_wdata)
  );

  // ---------------- MIB
  logic                       nvu_mib_we, nvu_mib_wsel;
  logic [BW-1:0]              nvu_mib_bank;
  logic [15:0]                nvu_mib_addr;
  logic [VRWIDTH-1:0]         nvu_mib_wdata;
  logic                       mib_rd_en;
  logic [$clog2(ACT_DEPTH)-1:0] mib_act_addr;
  logic [$clog2(W_DEPTH)-1:0]   mib_w_addr;
  logic [ACT_W-1:0]           mib_act;
  logic [N_PE-1:0][EXT_W-1:0] mib_w;

  mib #(.N_PE(N_PE), .PE_LANES(PE_LANES), .DW(DW), .VRWIDTH(VRWIDTH),
        .ACT_DEPTH(ACT_DEPTH), .W_DEPTH(W_DEPTH)) u_mib (
    .clk,
    .p0_we (mru_mib_we), .p0_wsel (mru_mib_wsel), .p0_bank (mru_mib_bank),
    .p0_addr (mru_mib_addr), .p0_data (mru_wdata),
    .p1_we (nvu_mib_we), .p1_wsel (nvu_mib_wsel), .p1_bank (nvu_mib_bank),
    .p1_addr (nvu_mib_addr), .p1_data (nvu_mib_wdata),
    .rd_en (mib_rd_en), .rd_act_addr (mib_act_addr), .rd_w_addr (mib_w_addr),
    .rd_act (mib_act), .rd_w (mib_w)
  );

  // ---------------- MMU + MMEM
  logic                           mmem_we;
  logic [$clog2(MMEM_DEPTH)-1:0]  mmem_waddr;
  logic [N_OUT*16-1:0]            mmem_wdata;
  logic                           mmem_rd_en;
  logic [15:0]                    mmem_raddr;
  logic [VRWIDTH-1:0]             mmem_rdata;

  mmu #(.N_PE(N_PE), .PE_LANES(PE_LANES), .DW(DW), .ACT_DEPTH(ACT_DEPTH),
        .W_DEPTH(W_DEPTH), .MMEM_DEPTH(MMEM_DEPTH)) u_mmu (
    .clk, .rst_n, .cmd_valid (mmu_v), .cmd_ready (mmu_r), .cmd (mmu_c), .busy (mmu_busy),
    .mib_rd_en, .mib_act_addr, .mib_w_addr, .mib_act, .mib_w,
    .mmem_we, .mmem_waddr, .mmem_wdata
  );

  mmem #(.N_OUT(N_OUT), .VRWIDTH(VRWIDTH), .DEPTH(MMEM_DEPTH)) u_mmem (
    .clk, .we (mmem_we), .waddr (mmem_waddr), .wdata (mmem_wdata),
    .rd_en (mmem_rd_en), .raddr (mmem_raddr), .rdata (mmem_rdata)
  );

  // ---------------- NVU + NMEM
  logic                   nmem_req, nmem_we, nmem_done, lsu_conflict, lsu_wait, nvu_stall;
  logic [NB-1:0][31:0]    nmem_addr;
  logic [NB-1:0][15:0]    nmem_wdata, nmem_rdata;
  logic                   mwu_req, mwu_gnt, mwu_rvalid;
  logic [$clog2(NMEM_DEPTH)-1:0] mwu_row;
  logic [NB-1:0][15:0]    mwu_rdata;

  nvu #(.VRWIDTH(VRWIDTH), .N_PE(N_PE), .UDEPTH(UDEPTH)) u_nvu (
    .clk, .rst_n, .cmd_valid (nvu_v), .cmd_ready (nvu_r), .cmd (nvu_c), .busy (nvu_busy),
    .ucode_we (ucode_we), .ucode_waddr ($clog2(UDEPTH)'(mru_dst_addr)),
    .ucode_wdata (ubundle_t'(mru_wdata[UBUNDLE_W-1:0])),
    .nmem_req, .nmem_we, .nmem_addr, .nmem_wdata, .nmem_done, .nmem_rdata,
    .mmem_rd_en, .mmem_raddr, .mmem_rdata,
    .mib_we (nvu_mib_we), .mib_wsel (nvu_mib_wsel), .mib_bank (nvu_mib_bank),
    .mib_addr (nvu_mib_addr), .mib_wdata (nvu_mib_wdata),
    .stall (nvu_stall)
  );

  nmem #(.VRWIDTH(VRWIDTH), .DEPTH(NMEM_DEPTH)) u_nmem (
    .clk, .rst_n,
    .lsu_req (nmem_req), .lsu_we (nmem_we), .lsu_addr (nmem_addr), .lsu_wdata (nmem_wdata),
    .lsu_done (nmem_done), .lsu_rdata (nmem_rdata),
    .lsu_conflict (lsu_conflict), .lsu_wait (lsu_wait),
    .mwu_req (mwu_req), .mwu_row (mwu_row), .mwu_gnt (mwu_gnt),
    .mwu_rvalid (mwu_rvalid), .mwu_rdata (mwu_rdata)
  );

  // ---------------- MWU
  mwu #(.VRWIDTH(VRWIDTH), .NMEM_DEPTH(NMEM_DEPTH)) u_mwu (
    .clk, .rst_n, .cmd_valid (mwu_v), .cmd_ready (mwu_r), .cmd (mwu_c), .busy (mwu_busy),
    .nmem_req (mwu_req), .nmem_row (mwu_row), .nmem_gnt (mwu_gnt),
    .nmem_rvalid (mwu_rvalid), .nmem_rdata (mwu_rdata),
    .ext_wr_valid, .ext_wr_ready, .ext_wr_addr, .ext_wr_data
  );
endmodule
