// nmem: NVU memory (NMEM) with arbiter and data permutation.
//
// NB = VRWIDTH/16 single-port banks, each holding 16-bit elements. Element
// address e lives in bank e % NB, row e / NB, so a unit-stride vector of NB
// elements touches every bank once and moves in a single access cycle.
// Two requesters share the banks:
//   - the NVU load/store unit (LSU) presents, per 16-bit lane, an element
//     address and write data; the permutation logic routes every lane to
//     its bank. If several lanes need the same bank (strided or indexed
//     access), the lowest pending lane wins and the rest retry in later
//     cycles until all lanes are served;
//   - the memory write unit (MWU) reads one whole row (NB elements) per
//     grant through its dedicated read port.
// When both request in the same cycle the arbiter alternates between them
// (round robin). The banked single-port organisation, the MWU read port,
// the arbiter and the permutation for strided/indexed access follow the
// published design; element granularity, the conflict-retry policy and
// round-robin arbitration are this design's choices.
//
// Timing: an LSU write finishes (lsu_done) in the cycle its last lane is
// written; an LSU read finishes one cycle after its last lane was read,
// with lsu_rdata valid in that cycle. lsu_req must stay high, with stable
// operands, until lsu_done. An MWU grant (mwu_gnt) returns the row on
// mwu_rdata one cycle later with mwu_rvalid.
module nmem #(
  parameter int VRWIDTH = 1024,
  parameter int DEPTH   = 512,
  localparam int NB     = VRWIDTH / 16,
  localparam int BW     = $clog2(NB),
  localparam int RW     = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // LSU port
  input  logic                      lsu_req,
  input  logic                      lsu_we,
  input  logic [NB-1:0][31:0]       lsu_addr,
  input  logic [NB-1:0][15:0]       lsu_wdata,
  output logic                      lsu_done,
  output logic [NB-1:0][15:0]       lsu_rdata,
  output logic                      lsu_conflict,  // a bank conflict forced a retry cycle
  output logic                      lsu_wait,      // request waited for the MWU
  // MWU port
  input  logic                      mwu_req,
  input  logic [RW-1:0]             mwu_row,
  output logic                      mwu_gnt,
  output logic                      mwu_rvalid,
  output logic [NB-1:0][15:0]       mwu_rdata
);
  typedef enum logic [1:0] {IDLE, ACTIVE, RDWAIT} st_e;
  st_e           st;
  logic [NB-1:0] pend_q, pend, served, served_q;
  logic          rr;        // 1: MWU has priority on the next conflict
  logic          lsu_gnt, lsu_want, mwu_gnt_q;

  logic [15:0]   bank [NB][DEPTH];
  logic [15:0]   bank_q [NB];

  // per-bank selection (the permutation network)
  logic [NB-1:0]          b_en, b_we;
  logic [NB-1:0][RW-1:0]  b_row;
  logic [NB-1:0][15:0]    b_wd;
  logic [NB-1:0]          lower;

  assign lsu_want = lsu_req && (st != RDWAIT);
  assign pend     = (st == ACTIVE) ? pend_q : '1;

  always_comb begin
    lsu_gnt = 1'b0;
    mwu_gnt = 1'b0;
    if (lsu_want && mwu_req) begin
      mwu_gnt = rr;
      lsu_gnt = !rr;
    end else begin
      lsu_gnt = lsu_want;
      mwu_gnt = mwu_req;
    end
    lsu_wait = lsu_want && !lsu_gnt;
  end

  always_comb begin
    b_en = '0; b_we = '0; b_row = '0; b_wd = '0; served = '0;
    if (mwu_gnt) begin
      for (int b = 0; b < NB; b++) begin
        b_en[b]  = 1'b1;
        b_row[b] = mwu_row;
      end
    end else if (lsu_gnt) begin
      // lowest pending lane of each bank: scan lanes from high to low
      for (int l = NB - 1; l >= 0; l--) begin
        if (pend[l]) begin
          b_en[lsu_addr[l][BW-1:0]]  = 1'b1;
          b_we[lsu_addr[l][BW-1:0]]  = lsu_we;
          b_row[lsu_addr[l][BW-1:0]] = RW'(lsu_addr[l] >> BW);
          b_wd[lsu_addr[l][BW-1:0]]  = lsu_wdata[l];
        end
      end
      // A lane is served when its bank works on its row; a write lane
      // also needs to be the lowest pending lane of that bank (reads of
      // one element by several lanes share the access).
      for (int l = 0; l < NB; l++)
        served[l] = pend[l] && (b_row[lsu_addr[l][BW-1:0]] == RW'(lsu_addr[l] >> BW))
                    && !(lsu_we && lower[l]);
    end
  end

  // lower[l]: a lower-numbered pending lane maps to the same bank as lane l
  always_comb begin
    lower = '0;
    for (int l = 1; l < NB; l++)
      for (int j = 0; j < l; j++)
        if (pend[j] && lsu_addr[j][BW-1:0] == lsu_addr[l][BW-1:0]) lower[l] = 1'b1;
  end

  assign lsu_conflict = lsu_gnt && ((pend & ~served) != '0);

  // banks: single port each
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (b_en[b]) begin
        if (b_we[b]) bank[b][b_row[b]] <= b_wd[b];
        else         bank_q[b]         <= bank[b][b_row[b]];
      end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; pend_q <= '0; served_q <= '0; rr <= 1'b0; mwu_gnt_q <= 1'b0;
    end else begin
      mwu_gnt_q <= mwu_gnt;
      served_q  <= (lsu_gnt && !lsu_we) ? served : '0;
      if (lsu_want && mwu_req) rr <= !rr;
      case (st)
        IDLE, ACTIVE:
          if (lsu_gnt) begin
            pend_q <= pend & ~served;
            if ((pend & ~served) != '0) st <= ACTIVE;
            else                         st <= lsu_we ? IDLE : RDWAIT;
          end
        RDWAIT: st <= IDLE;
        default: st <= IDLE;
      endcase
    end
  end

  // Gather read data back to lanes. Lanes served in earlier cycles are
  // kept in rdata_q; lanes served in the previous cycle come straight from
  // the bank output registers.
  logic [NB-1:0][15:0] rdata_q;
  always_ff @(posedge clk)
    for (int l = 0; l < NB; l++)
      if (served_q[l]) rdata_q[l] <= bank_q[lsu_addr[l][BW-1:0]];

  always_comb
    for (int l = 0; l < NB; l++)
      lsu_rdata[l] = served_q[l] ? bank_q[lsu_addr[l][BW-1:0]] : rdata_q[l];

  assign lsu_done   = (lsu_gnt && lsu_we && ((pend & ~served) == '0)) || (st == RDWAIT);
  assign mwu_rvalid = mwu_gnt_q;
  always_comb
    for (int b = 0; b < NB; b++) mwu_rdata[b] = bank_q[b];

  // A bank is never driven by both requesters in one cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(lsu_gnt && mwu_gnt));
endmodule
