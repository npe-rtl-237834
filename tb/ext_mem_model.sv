// ext_mem_model: behavioural model of the external memory interface
// (memory controller and DRAM), which is not part of the NPE design.
// Read requests are accepted when req_ready is high (randomly throttled when
// STALLS is set) and answered in order LAT cycles later; write beats are
// accepted when wr_ready is high (also throttled). Memory words are EXT_W
// bits, word addressed; testbenches fill and inspect `mem` directly.
//
// Behavioural model only: the original design uses the FPGA board's memory
// controller, whose protocol is not published; this interface is this
// design's own.
module ext_mem_model
  import npe_pkg::*;
#(
  parameter int DEPTH  = 4096,
  parameter int LAT    = 4,
  parameter bit STALLS = 1'b1
) (
  input  logic              clk,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [31:0]       rd_addr,
  output logic              rd_resp_valid,
  output logic [EXT_W-1:0]  rd_resp_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [31:0]       wr_addr,
  input  logic [EXT_W-1:0]  wr_data
);
  logic [EXT_W-1:0] mem [DEPTH];
  logic [EXT_W-1:0] pipe_d [LAT];
  logic             pipe_v [LAT];
  int rd_stalls = 0, wr_stalls = 0, writes = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_d[i] = '0; end
    rd_req_ready = 1; wr_ready = 1;
  end

  always @(posedge clk) begin
    if (rd_req_valid && !rd_req_ready) rd_stalls++;
    if (wr_valid && !wr_ready) wr_stalls++;
    for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= rd_req_valid && rd_req_ready;
    pipe_d[0] <= mem[rd_addr % DEPTH];
    if (wr_valid && wr_ready) begin
      mem[wr_addr % DEPTH] <= wr_data;
      writes++;
    end
    rd_req_ready <= STALLS ? (($urandom % 4) != 0) : 1'b1;
    wr_ready     <= STALLS ? (($urandom % 4) != 0) : 1'b1;
  end

  assign rd_resp_valid = pipe_v[LAT-1];
  assign rd_resp_data  = pipe_d[LAT-1];
endmodule
