// nvu_ibuf: NVU instruction buffer.
//
// A small first-in first-out queue of NVU commands between the instruction
// control unit and the microprogram controller, so the ICU can post the
// next NVU instruction while a microprogram runs. The buffer itself appears
// in the published block diagram; its depth and valid/ready handshake are
// this design's choices. in_ready is low when full; out_valid is high
// when not empty; a push and a pop can happen in the same cycle.
module nvu_ibuf
  import npe_pkg::*;
#(
  parameter int DEPTH = 4,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  nvu_cmd_t  in_cmd,
  output logic      out_valid,
  input  logic      out_ready,
  output nvu_cmd_t  out_cmd
);
  nvu_cmd_t       q [DEPTH];
  logic [AW-1:0]  rp, wp;
  logic [AW:0]    cnt;
  logic           push, pop;

  assign in_ready  = (cnt != (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_cmd   = q[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) q[wp] <= in_cmd;

  // The occupancy never exceeds the depth.
  assert property (@(posedge clk) disable iff (!rst_n) cnt <= (AW+1)'(DEPTH));
endmodule
