// mpc: NVU microprogram controller.
//
// Turns each NVU instruction from the instruction control unit into a run
// of VLIW micro-instruction bundles read from the microprogram memory. A
// bundle carries one load/store operation, three vector compute operations
// and one scalar operation (five instructions) plus a sequencing field:
//   C_SEQ  - go to the next bundle,
//   C_LDC  - load loop counter `cnt` from a scalar register, then next,
//   C_DJNZ - decrement loop counter `cnt`; branch to `target` if it is
//            still non-zero, otherwise fall through,
//   C_END  - the instruction is finished.
// When an instruction starts, its four arguments are first copied to the
// scalar registers s0..s3 (one per cycle), then bundles issue from the entry
// point `upc`. A bundle commits (all its register writes happen) in the
// cycle its load/store operation completes; until then the controller holds
// it, so a bundle takes one cycle unless it loads or meets a bank conflict.
// Splitting ICU instructions into VLIW bundles of five instructions from a
// microprogram memory follows the published MPC; the sequencing field, the
// two loop counters and the argument passing are this design's choices.
module mpc
  import npe_pkg::*;
#(
  parameter int UDEPTH = 512,
  localparam int UAW   = $clog2(UDEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  nvu_cmd_t        cmd,
  output logic            busy,
  // microprogram memory
  output logic [UAW-1:0]  upc,
  input  ubundle_t        bundle,
  // execution control
  output logic            run,       // a bundle is being executed
  input  logic            lsu_done,
  output logic            commit,    // the bundle's results are written this cycle
  output logic            stall,     // the bundle is held for its load/store
  // scalar register file
  input  logic [63:0]     ctrl_sval, // SRF[bundle.ctrl.sreg]
  output logic            arg_we,
  output logic [4:0]      arg_waddr,
  output logic [63:0]     arg_wdata
);
  typedef enum logic [1:0] {IDLE, ARGS, RUN} st_e;
  st_e          st;
  nvu_cmd_t     c;
  logic [1:0]   ai;
  logic [31:0]  cnt [2];
  logic [31:0]  cnt_dec;

  assign cmd_ready = (st == IDLE);
  assign busy      = (st != IDLE);
  assign run       = (st == RUN);
  assign commit    = run && lsu_done;
  assign stall     = run && !lsu_done;
  assign cnt_dec   = cnt[bundle.ctrl.cnt] - 32'd1;

  assign arg_we    = (st == ARGS);
  assign arg_waddr = 5'(ai);
  always_comb
    case (ai)
      2'd0:    arg_wdata = 64'(c.arg0);
      2'd1:    arg_wdata = 64'(c.arg1);
      2'd2:    arg_wdata = 64'(c.arg2);
      default: arg_wdata = 64'(c.arg3);
    endcase

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; c <= '0; ai <= '0; upc <= '0;
      cnt[0] <= '0; cnt[1] <= '0;
    end else begin
      case (st)
        IDLE:
          if (cmd_valid) begin
            c   <= cmd;
            ai  <= '0;
            upc <= UAW'(cmd.upc);
            st  <= ARGS;
          end
        ARGS: begin
          ai <= ai + 2'd1;
          if (ai == 2'd3) st <= RUN;
        end
        RUN:
          if (commit) begin
            case (bundle.ctrl.op)
              C_END: st <= IDLE;
              C_LDC: begin
                cnt[bundle.ctrl.cnt] <= ctrl_sval[31:0];
                upc <= upc + 1'b1;
              end
              C_DJNZ: begin
                cnt[bundle.ctrl.cnt] <= cnt_dec;
                upc <= (cnt_dec != 0) ? UAW'(bundle.ctrl.target) : upc + 1'b1;
              end
              default: upc <= upc + 1'b1;
            endcase
          end
        default: st <= IDLE;
      endcase
    end
  end

  // A held bundle must keep its load/store operation until it finishes.
  assert property (@(posedge clk) disable iff (!rst_n) stall |=> run);
endmodule
