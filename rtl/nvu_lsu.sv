// nvu_lsu: NVU vector load/store unit.
//
// Moves one VRWIDTH-bit vector per micro-instruction between the vector
// register file and
//   - NMEM: unit-stride, strided and indexed loads and stores. The LSU turns
//     the access into one 16-bit element address per lane
//     (base + lane, base + lane*stride, base + index[lane]) and lets the
//     NMEM's permutation logic route the lanes to its banks;
//   - MMEM: loads of one vector of MMU results (address counts vectors);
//   - MIB: stores of NVU results as MMU activations (address counts
//     activation words) or as MMU weights (address = word*N_PE + bank).
// The three targets and the three NMEM access patterns follow the published
// LSU; address units and formation (SRF base register + 16-bit offset,
// SRF stride register, 16-bit lane indices from a vector register) are this
// design's choices.
//
// Timing: `active` is held while the micro-instruction waits; `done` rises
// in the cycle the transfer completes (loaded data on vrf_wdata in that
// cycle). MIB stores and conflict-free NMEM stores finish in their first
// cycle, MMEM and conflict-free NMEM loads in their second.
module nvu_lsu
  import npe_pkg::*;
#(
  parameter int VRWIDTH = 1024,
  parameter int N_PE    = 128,
  localparam int NB     = VRWIDTH / 16,
  localparam int BW     = $clog2(N_PE)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   active,
  input  ulsu_t                  ins,
  input  logic [63:0]            base,
  input  logic [63:0]            stride,
  input  logic [VRWIDTH-1:0]     st_data,
  input  logic [VRWIDTH-1:0]     idx_vec,
  output logic                   done,
  output logic                   vrf_we,
  output logic [VRWIDTH-1:0]     vrf_wdata,
  // NMEM
  output logic                   nmem_req,
  output logic                   nmem_we,
  output logic [NB-1:0][31:0]    nmem_addr,
  output logic [NB-1:0][15:0]    nmem_wdata,
  input  logic                   nmem_done,
  input  logic [NB-1:0][15:0]    nmem_rdata,
  // MMEM
  output logic                   mmem_rd_en,
  output logic [15:0]            mmem_raddr,
  input  logic [VRWIDTH-1:0]     mmem_rdata,
  // MIB write port
  output logic                   mib_we,
  output logic                   mib_wsel,
  output logic [BW-1:0]          mib_bank,
  output logic [15:0]            mib_addr,
  output logic [VRWIDTH-1:0]     mib_wdata
);
  logic [31:0] addr;
  logic        mm_wait;
  logic        is_nmem;

  assign addr    = base[31:0] + 32'($signed(ins.offs));
  assign is_nmem = ins.op inside {L_LD_NMEM, L_LDS, L_LDX, L_ST_NMEM, L_STS, L_STX};

  always_comb begin
    for (int l = 0; l < NB; l++) begin
      case (ins.op)
        L_LDS, L_STS: nmem_addr[l] = addr + 32'(l) * stride[31:0];
        L_LDX, L_STX: nmem_addr[l] = addr + 32'(idx_vec[l*16 +: 16]);
        default:      nmem_addr[l] = addr + 32'(l);
      endcase
      nmem_wdata[l] = st_data[l*16 +: 16];
    end
  end

  assign nmem_req   = active && is_nmem;
  assign nmem_we    = ins.op inside {L_ST_NMEM, L_STS, L_STX};

  assign mmem_rd_en = active && (ins.op == L_LD_MMEM) && !mm_wait;
  assign mmem_raddr = addr[15:0];

  assign mib_we     = active && (ins.op inside {L_ST_ACT, L_ST_W});
  assign mib_wsel   = (ins.op == L_ST_W);
  assign mib_bank   = (ins.op == L_ST_W) ? addr[BW-1:0] : '0;
  assign mib_addr   = (ins.op == L_ST_W) ? 16'(addr >> BW) : addr[15:0];
  assign mib_wdata  = st_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mm_wait <= 1'b0;
    else        mm_wait <= mmem_rd_en;

  always_comb begin
    case (ins.op)
      L_NOP:                        done = 1'b1;
      L_LD_MMEM:                    done = mm_wait;
      L_ST_ACT, L_ST_W:             done = 1'b1;
      default:                      done = is_nmem ? nmem_done : 1'b1;
    endcase
    vrf_we    = active && done && (ins.op inside {L_LD_MMEM, L_LD_NMEM, L_LDS, L_LDX});
    vrf_wdata = (ins.op == L_LD_MMEM) ? mmem_rdata : nmem_rdata;
  end
endmodule
