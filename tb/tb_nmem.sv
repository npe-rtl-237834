// tb_nmem: checks the NVU memory.
//  - unit-stride store and load finish in 1 and 2 cycles;
//  - strided access with stride 2 over NB lanes needs 2 access cycles
//    (two lanes per bank), checked by cycle count and data;
//  - indexed gather, including repeated indices;
//  - MWU row reads and round-robin arbitration against the LSU.
// Reduced size: VRWIDTH 128 (8 banks).
//
// Banked single-port storage with an MWU arbiter and strided/indexed access
// follows the published design; the conflict order and the access counts
// checked here are this design's own.
module tb_nmem;
  localparam int VRWIDTH = 128, DEPTH = 64, NB = VRWIDTH / 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int waits = 0, conflicts = 0;

  logic lsu_req, lsu_we, lsu_done, lsu_conflict, lsu_wait;
  logic [NB-1:0][31:0] lsu_addr;
  logic [NB-1:0][15:0] lsu_wdata, lsu_rdata;
  logic mwu_req, mwu_gnt, mwu_rvalid;
  logic [5:0] mwu_row;
  logic [NB-1:0][15:0] mwu_rdata;
  logic [15:0] mdl [DEPTH*NB];

  nmem #(.VRWIDTH(VRWIDTH), .DEPTH(DEPTH)) dut (.*);

  always @(posedge clk) begin
    if (lsu_conflict) conflicts++;
    if (lsu_wait) waits++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // run one LSU access; returns the number of cycles until done
  task automatic access(bit we, int addrs[NB], output int cyc);
    @(negedge clk);
    lsu_req = 1; lsu_we = we;
    for (int l = 0; l < NB; l++) begin
      lsu_addr[l] = 32'(addrs[l]);
      lsu_wdata[l] = 16'($urandom);
    end
    cyc = 1;
    #1;
    while (!lsu_done) begin @(negedge clk); cyc++; end
    if (we) for (int l = 0; l < NB; l++) mdl[addrs[l]] = lsu_wdata[l];
    else for (int l = 0; l < NB; l++) chk(lsu_rdata[l] == mdl[addrs[l]], $sformatf("read lane %0d addr %0d", l, addrs[l]));
    @(posedge clk); #1 lsu_req = 0;
  endtask

  int a[NB];
  int cyc;
  initial begin
    lsu_req = 0; lsu_we = 0; lsu_addr = '0; lsu_wdata = '0; mwu_req = 0; mwu_row = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // fill the whole memory with unit-stride stores
    for (int r = 0; r < DEPTH; r++) begin
      for (int l = 0; l < NB; l++) a[l] = r * NB + l;
      access(1, a, cyc);
      chk(cyc == 1, "unit-stride store in 1 cycle");
    end
    // unaligned unit-stride load
    for (int l = 0; l < NB; l++) a[l] = 13 + l;
    access(0, a, cyc);
    chk(cyc == 2, $sformatf("unit-stride load in 2 cycles (%0d)", cyc));
    // stride 2 -> two lanes per bank -> 2 access cycles + 1 read latency
    for (int l = 0; l < NB; l++) a[l] = 40 + 2 * l;
    access(0, a, cyc);
    chk(cyc == 3, $sformatf("stride-2 load in 3 cycles (%0d)", cyc));
    access(1, a, cyc);
    chk(cyc == 2, $sformatf("stride-2 store in 2 cycles (%0d)", cyc));
    for (int l = 0; l < NB; l++) a[l] = 40 + 2 * l;
    access(0, a, cyc);
    // stride NB -> all lanes in one bank -> NB cycles
    for (int l = 0; l < NB; l++) a[l] = 5 + NB * l;
    access(0, a, cyc);
    chk(cyc == NB + 1, $sformatf("stride-NB load in NB+1 cycles (%0d)", cyc));
    // indexed with repeats: lanes 0..3 read one element
    for (int l = 0; l < NB; l++) a[l] = (l < 4) ? 77 : ($urandom % (DEPTH * NB));
    access(0, a, cyc);
    // random indexed stores and loads
    for (int it = 0; it < 30; it++) begin
      for (int l = 0; l < NB; l++) a[l] = $urandom % (DEPTH * NB);
      access(it % 2 == 0, a, cyc);
    end
    // MWU row read alone
    @(negedge clk); mwu_req = 1; mwu_row = 6'd9;
    #1 chk(mwu_gnt, "MWU granted when alone");
    @(negedge clk); mwu_req = 0;
    chk(mwu_rvalid, "MWU read data one cycle after grant");
    for (int b = 0; b < NB; b++) chk(mwu_rdata[b] == mdl[9 * NB + b], "MWU row data");
    // MWU and LSU together: both finish, arbitration alternates
    fork
      begin
        for (int l = 0; l < NB; l++) a[l] = 100 + l;
        access(0, a, cyc);
        chk(cyc >= 2, "LSU finishes while MWU competes");
      end
      begin
        @(negedge clk); mwu_req = 1; mwu_row = 6'd3;
        #1;
        while (!mwu_gnt) begin @(negedge clk); #1; end
        @(negedge clk); mwu_req = 0;
        chk(mwu_rvalid, "MWU rvalid after competing grant");
        for (int b = 0; b < NB; b++) chk(mwu_rdata[b] == mdl[3 * NB + b], "MWU row data (contended)");
      end
    join
    // a second contention round: the other requester gets priority now
    fork
      begin
        for (int l = 0; l < NB; l++) a[l] = 200 + l;
        access(0, a, cyc);
      end
      begin
        @(negedge clk); mwu_req = 1; mwu_row = 6'd4;
        #1;
        while (!mwu_gnt) begin @(negedge clk); #1; end
        @(negedge clk); mwu_req = 0;
        for (int b = 0; b < NB; b++) chk(mwu_rdata[b] == mdl[4 * NB + b], "MWU row data (round 2)");
      end
    join
    chk(waits >= 1, $sformatf("LSU waited for the MWU at least once (%0d)", waits));
    chk(conflicts >= 1, "bank conflicts happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
