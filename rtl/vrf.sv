// vrf: NVU vector register file.
//
// N_VREG registers of VRWIDTH bits with 8 combinational read ports and
// 4 write ports, enough for the three vector compute slots (two operands
// each), the load/store unit's store data and index vector, and write-back
// from the three slots and the load/store unit. The register count (32)
// and the need for 8 logical ports follow the published architecture; it
// builds the file from dual-port block RAMs with time sharing and
// duplication, which this design replaces by a flip-flop array (same
// behaviour, one write-back per port per cycle). When several write ports
// target one register in a cycle the highest-numbered port wins.
// Registers reset to zero.
module vrf #(
  parameter int N_VREG  = 32,
  parameter int VRWIDTH = 1024,
  parameter int N_RD    = 8,
  parameter int N_WR    = 4,
  localparam int RW     = $clog2(N_VREG)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [N_RD-1:0][RW-1:0]           raddr,
  output logic [N_RD-1:0][VRWIDTH-1:0]      rdata,
  input  logic [N_WR-1:0]                   we,
  input  logic [N_WR-1:0][RW-1:0]           waddr,
  input  logic [N_WR-1:0][VRWIDTH-1:0]      wdata
);
  logic [VRWIDTH-1:0] regs [N_VREG];

  always_comb
    for (int p = 0; p < N_RD; p++) rdata[p] = regs[raddr[p]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_VREG; r++) regs[r] <= '0;
    end else begin
      for (int p = 0; p < N_WR; p++)
        if (we[p]) regs[waddr[p]] <= wdata[p];
    end
  end
endmodule
