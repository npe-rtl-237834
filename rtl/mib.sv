// mib: MMU input buffer.
//
// Holds the operands of the matrix multiply unit in two parts: an
// activation buffer (one word = PE_LANES elements of DW bits, broadcast to
// all PEs) and N_PE weight banks (one bank per PE, one word = EXT_W bits:
// PE_LANES 16-bit weights, or 2*PE_LANES 8-bit weights in the 8-bit MMU).
// The published architecture says the MIB is written by the memory read
// unit and by the NVU and read by the MMU; the split into an activation
// buffer and per-PE weight banks, the depths and the port shapes are this
// design's choices.
//
// Ports: port 0 (MRU) writes one EXT_W beat per cycle, either ACT_PER_BEAT
// consecutive activation words or one weight word. Port 1 (NVU LSU) writes
// one VRWIDTH vector per cycle, either VRWIDTH/ACT_W consecutive activation
// words or VRWIDTH/EXT_W weight words at the same address in consecutive
// banks. When both ports hit the same word in a cycle, port 1 wins.
// The MMU read port is synchronous: data appears the cycle after rd_en.
module mib
  import npe_pkg::*;
#(
  parameter int N_PE      = 128,
  parameter int PE_LANES  = 16,
  parameter int DW        = 16,
  parameter int VRWIDTH   = 1024,
  parameter int ACT_DEPTH = 1024,
  parameter int W_DEPTH   = 256,
  localparam int ACT_W    = PE_LANES * DW,
  localparam int AAW      = $clog2(ACT_DEPTH),
  localparam int WAW      = $clog2(W_DEPTH),
  localparam int BW       = $clog2(N_PE)
) (
  input  logic                  clk,
  // port 0: MRU
  input  logic                  p0_we,
  input  logic                  p0_wsel,      // 0 activation, 1 weight
  input  logic [BW-1:0]         p0_bank,
  input  logic [15:0]           p0_addr,
  input  logic [EXT_W-1:0]      p0_data,
  // port 1: NVU LSU
  input  logic                  p1_we,
  input  logic                  p1_wsel,
  input  logic [BW-1:0]         p1_bank,
  input  logic [15:0]           p1_addr,
  input  logic [VRWIDTH-1:0]    p1_data,
  // MMU read port
  input  logic                  rd_en,
  input  logic [AAW-1:0]        rd_act_addr,
  input  logic [WAW-1:0]        rd_w_addr,
  output logic [ACT_W-1:0]      rd_act,
  output logic [N_PE-1:0][EXT_W-1:0] rd_w
);
  localparam int ACT_PER_BEAT = (EXT_W >= ACT_W) ? EXT_W / ACT_W : 1;
  localparam int ACT_PER_VEC  = VRWIDTH / ACT_W;
  localparam int W_PER_VEC    = (VRWIDTH >= EXT_W) ? VRWIDTH / EXT_W : 1;

  logic [ACT_W-1:0] act_mem [ACT_DEPTH];
  logic [EXT_W-1:0] w_mem   [N_PE][W_DEPTH];

  always_ff @(posedge clk) begin
    if (p0_we && !p0_wsel)
      for (int i = 0; i < ACT_PER_BEAT; i++)
        act_mem[AAW'(p0_addr) + AAW'(i)] <= p0_data[i*ACT_W +: ACT_W];
    if (p0_we && p0_wsel)
      w_mem[p0_bank][WAW'(p0_addr)] <= p0_data;
    if (p1_we && !p1_wsel)
      for (int i = 0; i < ACT_PER_VEC; i++)
        act_mem[AAW'(p1_addr) + AAW'(i)] <= p1_data[i*ACT_W +: ACT_W];
    if (p1_we && p1_wsel)
      for (int i = 0; i < W_PER_VEC; i++)
        w_mem[p1_bank + BW'(i)][WAW'(p1_addr)] <= p1_data[i*EXT_W +: EXT_W];
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_act <= act_mem[rd_act_addr];
      for (int b = 0; b < N_PE; b++) rd_w[b] <= w_mem[b][rd_w_addr];
    end
  end
endmodule
