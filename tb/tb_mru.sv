// tb_mru: checks the memory read unit with the external memory model:
// copies to the MIB activation buffer, the MIB weight banks (bank-fastest
// layout with wrap to the next word), the microprogram memory and the
// instruction memory, under random read back-pressure; also checks that
// an unthrottled copy of N words streams in N + latency cycles.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_mru;
  import npe_pkg::*;
  import npe_tb_pkg::*;
  localparam int N_PE = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, busy;
  mru_cmd_t cmd;
  logic ext_rd_req_valid, ext_rd_req_ready, ext_rd_resp_valid;
  logic [31:0] ext_rd_addr;
  logic [EXT_W-1:0] ext_rd_resp_data, wdata;
  logic mib_we, mib_wsel, ucode_we, imem_we;
  logic [1:0] mib_bank;
  logic [15:0] mib_addr, dst_addr;

  mru #(.N_PE(N_PE)) dut (.*);
  ext_mem_model #(.DEPTH(256), .LAT(3), .STALLS(1)) mem (
    .clk, .rd_req_valid (ext_rd_req_valid), .rd_req_ready (ext_rd_req_ready), .rd_addr (ext_rd_addr),
    .rd_resp_valid (ext_rd_resp_valid), .rd_resp_data (ext_rd_resp_data),
    .wr_valid (1'b0), .wr_ready (), .wr_addr (32'd0), .wr_data ('0));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // destination capture
  logic [EXT_W-1:0] act [64], wt [N_PE][16], uc [64], im [64];
  always @(posedge clk) begin
    if (mib_we && !mib_wsel) act[mib_addr] <= wdata;
    if (mib_we && mib_wsel)  wt[mib_bank][mib_addr] <= wdata;
    if (ucode_we) uc[dst_addr] <= wdata;
    if (imem_we)  im[dst_addr] <= wdata;
  end

  task automatic copy(mru_dst_e d, int ea, int cnt, int da, int db, output int cyc);
    @(negedge clk);
    cmd_valid = 1; cmd = '{dst: d, dst_bank: 16'(db), dst_addr: 16'(da), count: 16'(cnt), ext_addr: 32'(ea)};
    #1 chk(cmd_ready, "ready when idle");
    @(negedge clk); cmd_valid = 0; cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
  endtask

  int cyc;
  initial begin
    cmd_valid = 0; cmd = '0;
    for (int i = 0; i < 256; i++) mem.mem[i] = {8{$urandom}};
    repeat (2) @(negedge clk); rst_n = 1;
    copy(D_MIB_ACT, 10, 12, 3, 0, cyc);
    for (int i = 0; i < 12; i++) chk(act[3 + i] == mem.mem[10 + i], "activation copy");
    copy(D_MIB_W, 40, 10, 2, 1, cyc);       // starts at bank 1 of word 2
    for (int i = 0; i < 10; i++) chk(wt[(1 + i) % N_PE][2 + (1 + i) / N_PE] == mem.mem[40 + i], $sformatf("weight copy %0d", i));
    copy(D_UCODE, 100, 7, 20, 0, cyc);
    for (int i = 0; i < 7; i++) chk(uc[20 + i] == mem.mem[100 + i], "ucode copy");
    copy(D_IMEM, 120, 5, 0, 0, cyc);
    for (int i = 0; i < 5; i++) chk(im[i] == mem.mem[120 + i], "imem copy");
    chk(mem.rd_stalls > 0, "read back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
