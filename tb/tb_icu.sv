// tb_icu: checks the instruction control unit with behavioural units:
// program load request to the MRU (destination = instruction memory),
// in-order dispatch of MRU/MMU/NVU/MWU commands with their payloads under
// random ready, SYNC waiting until the masked units are idle, and END.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_icu;
  import npe_pkg::*;
  import npe_tb_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done, imem_we, sync_wait;
  logic [31:0] prog_addr;
  logic [15:0] prog_len, imem_waddr;
  logic [EXT_W-1:0] imem_wdata;
  logic [3:0] unit_busy;
  logic mru_valid, mru_ready, mmu_valid, mmu_ready, nvu_valid, nvu_ready, mwu_valid, mwu_ready;
  mru_cmd_t mru_cmd; mmu_cmd_t mmu_cmd; nvu_cmd_t nvu_cmd; mwu_cmd_t mwu_cmd;

  icu #(.IMEM_DEPTH(64)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  icu_instr_t prog [16];
  int busy_cnt [4];
  int log_unit[$], log_tag[$];
  int sync_waits = 0, sync_violations = 0;

  // unit models: random ready, busy for a random time after each command
  always @(posedge clk) begin
    for (int u = 0; u < 4; u++) if (busy_cnt[u] > 0) busy_cnt[u]--;
    if (mru_valid && mru_ready) begin log_unit.push_back(U_MRU); log_tag.push_back(int'(mru_cmd.count)); busy_cnt[U_MRU] = 3 + $urandom % 5; end
    if (mmu_valid && mmu_ready) begin log_unit.push_back(U_MMU); log_tag.push_back(int'(mmu_cmd.rows)); busy_cnt[U_MMU] = 3 + $urandom % 9; end
    if (nvu_valid && nvu_ready) begin log_unit.push_back(U_NVU); log_tag.push_back(int'(nvu_cmd.upc)); busy_cnt[U_NVU] = 3 + $urandom % 9; end
    if (mwu_valid && mwu_ready) begin log_unit.push_back(U_MWU); log_tag.push_back(int'(mwu_cmd.rows)); busy_cnt[U_MWU] = 3 + $urandom % 5; end
    if (sync_wait) sync_waits++;
  end
  always_comb for (int u = 0; u < 4; u++) unit_busy[u] = busy_cnt[u] != 0;
  always @(negedge clk) begin
    mru_ready <= !unit_busy[U_MRU] && 1'($urandom);
    mmu_ready <= !unit_busy[U_MMU] && 1'($urandom);
    nvu_ready <= 1'($urandom);
    mwu_ready <= !unit_busy[U_MWU] && 1'($urandom);
  end

  // program-load side of the MRU: after the load command, write the words
  initial begin
    imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    wait (log_unit.size() == 1);
    @(negedge clk);
    for (int i = 0; i < 9; i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 16'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
  end

  // a command issued after a SYNC must find the synced units idle
  int after_sync = 0;
  always @(posedge clk)
    if (dut.st == 3'd3 && dut.ins.op == I_SYNC && !sync_wait && (unit_busy & dut.ins.sync_mask) != 0)
      sync_violations++;

  initial begin
    start = 0; prog_addr = 32'h40; prog_len = 9;
    prog[0] = ins_mru(D_MIB_ACT, 0, 5, 0);
    prog[1] = ins_mmu(0, 0, 1, 7, 1, 0, 0);
    prog[2] = ins_nvu(33);
    prog[3] = ins_sync((1 << U_MMU) | (1 << U_NVU) | (1 << U_MRU));
    prog[4] = ins_mwu(0, 4, 0);
    prog[5] = ins_nvu(44);
    prog[6] = ins_mmu(0, 0, 1, 9, 1, 0, 0);
    prog[7] = ins_sync(4'hf);
    prog[8] = ins_end();
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk(log_unit.size() == 7, $sformatf("7 commands dispatched (%0d)", log_unit.size()));
    if (log_unit.size() == 7) begin
      chk(log_unit[0] == U_MRU && log_tag[0] == 9, "program load through MRU");
      chk(log_unit[1] == U_MRU && log_tag[1] == 5, "MRU command");
      chk(log_unit[2] == U_MMU && log_tag[2] == 7, "MMU command");
      chk(log_unit[3] == U_NVU && log_tag[3] == 33, "NVU command");
      chk(log_unit[4] == U_MWU && log_tag[4] == 4, "MWU command after sync");
      chk(log_unit[5] == U_NVU && log_tag[5] == 44, "second NVU command");
      chk(log_unit[6] == U_MMU && log_tag[6] == 9, "second MMU command");
    end
    chk(unit_busy == 0, "final SYNC left all units idle");
    chk(sync_waits > 0, "SYNC waited");
    chk(sync_violations == 0, "SYNC never passed with a busy unit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
