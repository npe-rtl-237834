// mmu: matrix multiply unit.
//
// Computes out[r][n] = quantize( sum_k act[r][k] * W[k][n] ) for one block of
// N_OUT output columns, in the five published stages:
//   1. data selection  - per cycle, read one activation word (PE_LANES
//                        elements, broadcast to all PEs) and the weight word
//                        at the same address of every PE's weight bank;
//   2. inner product   - PE_LANES multipliers per PE (mmu_pe);
//   3. adder tree      - inside each PE;
//   4. accumulation    - 48-bit accumulator per output over k_steps words;
//   5. quantization    - round, arithmetic right shift by qshift and
//                        saturate to 16 bits, then write one MMEM row.
// The 128 PEs x 16 multipliers (2048 multiplies per cycle, 4096 in the
// 8-bit MMU where each multiplier slot makes two products sharing the
// activation) and the 16-bit result format follow the published design.
// The published MMU can also sum PE outputs in a second adder tree when a
// matrix has fewer outputs; that mode is not built here (every PE makes its
// own output column). Accumulator width, rounding, command fields and the
// loop order (rows outer, k inner) are this design's choices.
//
// Timing: one (row, k) step issued per cycle, fully pipelined; the MMEM row
// of a given output row is written 5 cycles after its last step was issued.
// A command takes rows*k_steps + 5 cycles. cmd_ready is high only when idle.
module mmu
  import npe_pkg::*;
#(
  parameter int N_PE      = 128,
  parameter int PE_LANES  = 16,
  parameter int DW        = 16,
  parameter int ACT_DEPTH = 1024,
  parameter int W_DEPTH   = 256,
  parameter int MMEM_DEPTH = 256,
  localparam int NO       = (DW == 8) ? 2 : 1,
  localparam int N_OUT    = N_PE * NO,
  localparam int ACT_W    = PE_LANES * DW,
  localparam int AAW      = $clog2(ACT_DEPTH),
  localparam int WAW      = $clog2(W_DEPTH),
  localparam int MAW      = $clog2(MMEM_DEPTH)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  mmu_cmd_t                     cmd,
  output logic                         busy,
  // MIB read port
  output logic                         mib_rd_en,
  output logic [AAW-1:0]               mib_act_addr,
  output logic [WAW-1:0]               mib_w_addr,
  input  logic [ACT_W-1:0]             mib_act,
  input  logic [N_PE-1:0][EXT_W-1:0]   mib_w,
  // MMEM write port
  output logic                         mmem_we,
  output logic [MAW-1:0]               mmem_waddr,
  output logic [N_OUT*16-1:0]          mmem_wdata
);
  localparam int SW   = 2 * DW + $clog2(PE_LANES);
  localparam int ACCW = 48;

  typedef struct packed {
    logic        v;
    logic        first;
    logic        last;
    logic [15:0] row;
  } tag_t;

  mmu_cmd_t    c;
  logic        run;
  logic [15:0] r, k;
  tag_t        t1, t2, t3, t4;

  // ---------------- stage 1: data selection (address generation)
  assign cmd_ready    = !busy;
  assign mib_rd_en    = run;
  assign mib_act_addr = AAW'(c.act_base + r * c.act_stride + k);
  assign mib_w_addr   = WAW'(c.w_base + k);
  assign busy         = run || t1.v || t2.v || t3.v || t4.v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; r <= '0; k <= '0; c <= '0;
      t1 <= '0; t2 <= '0; t3 <= '0; t4 <= '0;
    end else begin
      if (cmd_valid && cmd_ready && cmd.rows != 0 && cmd.k_steps != 0) begin
        c <= cmd; run <= 1'b1; r <= '0; k <= '0;
      end else if (run) begin
        if (k == c.k_steps - 1) begin
          k <= '0;
          r <= r + 1'b1;
          if (r == c.rows - 1) run <= 1'b0;
        end else begin
          k <= k + 1'b1;
        end
      end
      t1 <= '{v: run, first: (k == 0), last: (k == c.k_steps - 1), row: r};
      t2 <= t1;
      t3 <= t2;
      t4 <= t3;
    end
  end

  // ---------------- stages 2-3: PEs (multipliers + adder tree)
  logic [N_PE-1:0][NO-1:0][SW-1:0] pe_sum;
  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    mmu_pe #(.PE_LANES(PE_LANES), .DW(DW)) u_pe (
      .clk (clk),
      .en  (1'b1),
      .act (mib_act),
      .w   (mib_w[p]),
      .sum (pe_sum[p])
    );
  end

  // ---------------- stage 4: accumulation
  logic signed [ACCW-1:0] acc [N_OUT];
  always_ff @(posedge clk)
    if (t3.v)
      for (int p = 0; p < N_PE; p++)
        for (int o = 0; o < NO; o++)
          acc[p*NO+o] <= (t3.first ? '0 : acc[p*NO+o]) + ACCW'($signed(pe_sum[p][o]));

  // ---------------- stage 5: quantization and MMEM write
  always_comb begin
    logic signed [ACCW:0] rnd;
    for (int n = 0; n < N_OUT; n++) begin
      rnd = (ACCW+1)'(acc[n]);
      if (c.qshift != 0) rnd = (rnd + ((ACCW+1)'(1) <<< (c.qshift - 1))) >>> c.qshift;
      if (rnd > (ACCW+1)'(32767))       mmem_wdata[n*16 +: 16] = 16'h7fff;
      else if (rnd < -(ACCW+1)'(32768)) mmem_wdata[n*16 +: 16] = 16'h8000;
      else                              mmem_wdata[n*16 +: 16] = rnd[15:0];
    end
  end
  assign mmem_we    = t4.v && t4.last;
  assign mmem_waddr = MAW'(c.out_base + t4.row);

  // An accepted command with work makes the unit busy.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && cmd_ready && cmd.rows != 0 && cmd.k_steps != 0 |=> busy);
endmodule
