// ucode_mem: NVU microprogram memory.
//
// Stores the VLIW micro-instruction bundles that the microprogram
// controller steps through. The published architecture only says that the
// microprogram of each NVU instruction lives here; this design loads it
// through the memory read unit (write port, one bundle per cycle) and reads
// it combinationally (a distributed-RAM style read), so the controller can
// issue one bundle per cycle without a fetch bubble. Depth is this design's
// choice.
module ucode_mem
  import npe_pkg::*;
#(
  parameter int DEPTH = 512,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AW-1:0]  waddr,
  input  ubundle_t       wdata,
  input  logic [AW-1:0]  raddr,
  output ubundle_t       rdata
);
  ubundle_t mem [DEPTH];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
