// mwu: memory write unit.
//
// Copies `rows` NMEM rows (VRWIDTH bits each, i.e. VRWIDTH/16 elements)
// to external memory, BEATS = VRWIDTH/EXT_W consecutive words per row,
// starting at ext_addr. For each row it requests the NMEM's dedicated read
// port (the NMEM arbiter may make it wait while the NVU load/store unit
// uses the banks), takes the row one cycle after the grant and sends it as
// BEATS write beats (valid/ready). That the MWU drains final results from
// NMEM through its own arbitrated port to external memory follows the
// published design; the row/beat layout and the write channel are this
// design's choices. Rows are handled one after another (no overlap of a
// row's NMEM read with the previous row's beats).
module mwu
  import npe_pkg::*;
#(
  parameter int VRWIDTH = 1024,
  parameter int NMEM_DEPTH = 512,
  localparam int BEATS  = (VRWIDTH >= EXT_W) ? VRWIDTH / EXT_W : 1,
  localparam int RW     = $clog2(NMEM_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  mwu_cmd_t            cmd,
  output logic                busy,
  // NMEM read port
  output logic                nmem_req,
  output logic [RW-1:0]       nmem_row,
  input  logic                nmem_gnt,
  input  logic                nmem_rvalid,
  input  logic [VRWIDTH-1:0]  nmem_rdata,
  // external memory write channel
  output logic                ext_wr_valid,
  input  logic                ext_wr_ready,
  output logic [31:0]         ext_wr_addr,
  output logic [EXT_W-1:0]    ext_wr_data
);
  typedef enum logic [1:0] {IDLE, REQ, RDATA, WRITE} st_e;
  st_e                st;
  mwu_cmd_t           c;
  logic [15:0]        row;
  logic [15:0]        beat;
  logic [VRWIDTH-1:0] buf_q;

  assign busy         = (st != IDLE);
  assign cmd_ready    = (st == IDLE);
  assign nmem_req     = (st == REQ);
  assign nmem_row     = RW'(c.nmem_row + row);
  assign ext_wr_valid = (st == WRITE);
  assign ext_wr_addr  = c.ext_addr + 32'(row) * 32'(BEATS) + 32'(beat);
  assign ext_wr_data  = EXT_W'(buf_q >> (int'(beat) * EXT_W));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; c <= '0; row <= '0; beat <= '0; buf_q <= '0;
    end else begin
      case (st)
        IDLE:  if (cmd_valid && cmd.rows != 0) begin
                 c <= cmd; row <= '0; beat <= '0; st <= REQ;
               end
        REQ:   if (nmem_gnt) st <= RDATA;
        RDATA: if (nmem_rvalid) begin
                 buf_q <= nmem_rdata; beat <= '0; st <= WRITE;
               end
        WRITE: if (ext_wr_ready) begin
                 if (beat == 16'(BEATS - 1)) begin
                   beat <= '0;
                   row  <= row + 1'b1;
                   st   <= (row == c.rows - 1) ? IDLE : REQ;
                 end else begin
                   beat <= beat + 1'b1;
                 end
               end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
