// srf: NVU scalar register file.
//
// N_SREG 64-bit registers with N_RD combinational read ports and N_WR
// write ports. The published architecture names the SRF as the home of
// vector-reduction results, of the scalar operands of vector-scalar
// operations and of the scalar compute unit's operands; the register
// count, width and port numbers are this design's choices (64 bits is the
// widest element the compute units handle). The highest-numbered write port
// wins a collision. Registers reset to zero.
module srf #(
  parameter int N_SREG = 32,
  parameter int N_RD   = 8,
  parameter int N_WR   = 3,
  localparam int RW    = $clog2(N_SREG)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_RD-1:0][RW-1:0]      raddr,
  output logic [N_RD-1:0][63:0]        rdata,
  input  logic [N_WR-1:0]              we,
  input  logic [N_WR-1:0][RW-1:0]      waddr,
  input  logic [N_WR-1:0][63:0]        wdata
);
  logic [63:0] regs [N_SREG];

  always_comb
    for (int p = 0; p < N_RD; p++) rdata[p] = regs[raddr[p]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_SREG; r++) regs[r] <= '0;
    end else begin
      for (int p = 0; p < N_WR; p++)
        if (we[p]) regs[waddr[p]] <= wdata[p];
    end
  end
endmodule
