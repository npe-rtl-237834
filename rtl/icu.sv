// icu: instruction control unit.
//
// Runs an NPE program: on `start` it has the memory read unit copy
// prog_len instruction words from external address prog_addr into its
// instruction memory, then steps through them, handing each to its unit
// over a valid/ready command port (MRU, MMU, NVU, MWU). Units run
// concurrently; the program orders them with SYNC instructions, which wait
// until every unit in the mask is idle, and ends with END (done goes high
// and stays high until the next start). That the ICU sends instructions to
// all functional units, which then work over many cycles in a pipelined,
// concurrent way, and that the MRU supplies it, follows the published
// design; the instruction format, the SYNC mechanism and the program load
// are this design's choices.
//
// Timing: one instruction is dispatched per cycle when the target unit is
// ready; a SYNC instruction retires in the first cycle its units are idle.
module icu
  import npe_pkg::*;
#(
  parameter int IMEM_DEPTH = 256,
  localparam int IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [31:0]      prog_addr,
  input  logic [15:0]      prog_len,
  output logic             done,
  // instruction memory write (from the MRU)
  input  logic             imem_we,
  input  logic [15:0]      imem_waddr,
  input  logic [EXT_W-1:0] imem_wdata,
  // unit status
  input  logic [3:0]       unit_busy,    // bit order U_MRU, U_MMU, U_NVU, U_MWU
  // command ports
  output logic             mru_valid,
  input  logic             mru_ready,
  output mru_cmd_t         mru_cmd,
  output logic             mmu_valid,
  input  logic             mmu_ready,
  output mmu_cmd_t         mmu_cmd,
  output logic             nvu_valid,
  input  logic             nvu_ready,
  output nvu_cmd_t         nvu_cmd,
  output logic             mwu_valid,
  input  logic             mwu_ready,
  output mwu_cmd_t         mwu_cmd,
  output logic             sync_wait    // a SYNC instruction is waiting
);
  typedef enum logic [2:0] {IDLE, LOAD, LOADWAIT, EXEC, DONE} st_e;
  st_e         st;
  logic [IAW-1:0] pc;
  icu_instr_t  imem [IMEM_DEPTH];
  icu_instr_t  ins;
  logic [31:0] p_addr;
  logic [15:0] p_len;
  logic        adv;

  always_ff @(posedge clk) if (imem_we) imem[IAW'(imem_waddr)] <= imem_wdata;

  assign ins  = imem[pc];
  assign done = (st == DONE);

  always_comb begin
    mru_valid = 1'b0; mmu_valid = 1'b0; nvu_valid = 1'b0; mwu_valid = 1'b0;
    mru_cmd   = mru_cmd_t'(ins.payload[$bits(mru_cmd_t)-1:0]);
    mmu_cmd   = mmu_cmd_t'(ins.payload[$bits(mmu_cmd_t)-1:0]);
    nvu_cmd   = nvu_cmd_t'(ins.payload[$bits(nvu_cmd_t)-1:0]);
    mwu_cmd   = mwu_cmd_t'(ins.payload[$bits(mwu_cmd_t)-1:0]);
    adv       = 1'b0;
    sync_wait = 1'b0;
    if (st == LOAD) begin
      mru_valid = 1'b1;
      mru_cmd   = '{dst: D_IMEM, dst_bank: '0, dst_addr: '0, count: p_len, ext_addr: p_addr};
    end else if (st == EXEC) begin
      case (ins.op)
        I_MRU:  begin mru_valid = 1'b1; adv = mru_ready; end
        I_MMU:  begin mmu_valid = 1'b1; adv = mmu_ready; end
        I_NVU:  begin nvu_valid = 1'b1; adv = nvu_ready; end
        I_MWU:  begin mwu_valid = 1'b1; adv = mwu_ready; end
        I_SYNC: begin adv = ((unit_busy & ins.sync_mask) == '0); sync_wait = !adv; end
        default: adv = 1'b0;   // I_END
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; pc <= '0; p_addr <= '0; p_len <= '0;
    end else begin
      case (st)
        IDLE, DONE:
          if (start) begin
            p_addr <= prog_addr; p_len <= prog_len; pc <= '0; st <= LOAD;
          end
        LOAD:     if (mru_ready) st <= LOADWAIT;
        LOADWAIT: if (!unit_busy[U_MRU]) st <= EXEC;
        EXEC: begin
          if (ins.op == I_END) st <= DONE;
          else if (adv)        pc <= pc + 1'b1;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
