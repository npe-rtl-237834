// mmem: MMU scratchpad memory.
//
// The matrix multiply unit writes one complete output row per cycle
// (N_OUT 16-bit results); the NVU load/store unit reads one VRWIDTH-bit
// vector per cycle. A row holds ROW_W/VRWIDTH vectors, so the read address
// counts vectors: row = addr / VEC_PER_ROW, slice = addr % VEC_PER_ROW.
// The published architecture fixes the 16-bit result format and the
// MMU-writes / NVU-reads data flow; the depth and the row/vector geometry
// are this design's choices. Reads are synchronous (data one cycle after
// rd_en); a write and a read of the same row in one cycle return the old row.
module mmem #(
  parameter int N_OUT   = 128,
  parameter int VRWIDTH = 1024,
  parameter int DEPTH   = 256,
  localparam int ROW_W  = N_OUT * 16,
  localparam int VEC_PER_ROW = (ROW_W >= VRWIDTH) ? ROW_W / VRWIDTH : 1,
  localparam int AW     = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [ROW_W-1:0]   wdata,
  input  logic               rd_en,
  input  logic [15:0]        raddr,    // vector address
  output logic [VRWIDTH-1:0] rdata
);
  logic [ROW_W-1:0] mem [DEPTH];
  logic [AW-1:0]    row;
  logic [15:0]      slice;

  always_comb begin
    row   = AW'(raddr / 16'(VEC_PER_ROW));
    slice = raddr % 16'(VEC_PER_ROW);
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rdata <= VRWIDTH'(mem[row] >> (int'(slice) * VRWIDTH));
  end
endmodule
