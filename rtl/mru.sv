// mru: memory read unit.
//
// Copies `count` consecutive words (EXT_W bits each) from external memory to
// one on-chip destination: the MIB activation buffer (ACT_PER_BEAT words per
// beat), the MIB weight banks (beat i goes to bank (dst_bank+i) mod N_PE,
// word dst_addr + (dst_bank+i) div N_PE, so consecutive beats fill one word
// of every PE before moving on), the NVU microprogram memory, or the ICU
// instruction memory. That the MRU reads external memory and fills the MIB,
// and that it feeds the instruction control unit, follows the published
// block diagram; loading microprograms the same way, the destination
// layouts and the read channel are this design's choices.
//
// External read channel: a request (valid/ready, word address) per beat and
// in-order responses (valid, data) any number of cycles later; requests
// are issued back-to-back, so the copy streams at one beat per cycle when
// the memory keeps up. busy is high from the accepted command until the last
// response has been written.
module mru
  import npe_pkg::*;
#(
  parameter int N_PE     = 128,
  parameter int PE_LANES = 16,
  parameter int DW       = 16,
  localparam int ACT_W   = PE_LANES * DW,
  localparam int ACT_PER_BEAT = (EXT_W >= ACT_W) ? EXT_W / ACT_W : 1,
  localparam int BW      = $clog2(N_PE)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  mru_cmd_t          cmd,
  output logic              busy,
  // external memory read channel
  output logic              ext_rd_req_valid,
  input  logic              ext_rd_req_ready,
  output logic [31:0]       ext_rd_addr,
  input  logic              ext_rd_resp_valid,
  input  logic [EXT_W-1:0]  ext_rd_resp_data,
  // destinations
  output logic              mib_we,
  output logic              mib_wsel,
  output logic [BW-1:0]     mib_bank,
  output logic [15:0]       mib_addr,
  output logic              ucode_we,
  output logic              imem_we,
  output logic [15:0]       dst_addr,   // ucode / imem word address
  output logic [EXT_W-1:0]  wdata
);
  mru_cmd_t    c;
  logic        act;
  logic [15:0] issued, received;
  logic [31:0] lin;

  assign busy             = act;
  assign cmd_ready        = !act;
  assign ext_rd_req_valid = act && (issued != c.count);
  assign ext_rd_addr      = c.ext_addr + 32'(issued);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; c <= '0; issued <= '0; received <= '0;
    end else if (!act) begin
      if (cmd_valid && cmd.count != 0) begin
        c <= cmd; act <= 1'b1; issued <= '0; received <= '0;
      end
    end else begin
      if (ext_rd_req_valid && ext_rd_req_ready) issued <= issued + 1'b1;
      if (ext_rd_resp_valid) begin
        received <= received + 1'b1;
        if (received == c.count - 1) act <= 1'b0;
      end
    end
  end

  // destination of the beat that arrives now
  always_comb begin
    lin      = 32'(c.dst_bank) + 32'(received);
    wdata    = ext_rd_resp_data;
    mib_we   = act && ext_rd_resp_valid && (c.dst == D_MIB_ACT || c.dst == D_MIB_W);
    mib_wsel = (c.dst == D_MIB_W);
    mib_bank = BW'(lin % 32'(N_PE));
    mib_addr = (c.dst == D_MIB_W) ? c.dst_addr + 16'(lin / 32'(N_PE))
                                  : c.dst_addr + 16'(received * 16'(ACT_PER_BEAT));
    ucode_we = act && ext_rd_resp_valid && (c.dst == D_UCODE);
    imem_we  = act && ext_rd_resp_valid && (c.dst == D_IMEM);
    dst_addr = c.dst_addr + received;
  end

  // Responses only arrive for issued requests.
  assert property (@(posedge clk) disable iff (!rst_n) ext_rd_resp_valid |-> act && received < issued);
endmodule
