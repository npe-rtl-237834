// tb_mpc: checks the microprogram controller: argument copy to s0..s3,
// sequencing, loop counter load and decrement-and-branch, END, holding a
// bundle while its load/store is not done, and the cycle count of a run.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_mpc;
  import npe_pkg::*;
  import npe_tb_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, busy, run, lsu_done, commit, stall, arg_we;
  nvu_cmd_t cmd;
  logic [8:0] upc;
  ubundle_t bundle;
  logic [63:0] ctrl_sval, arg_wdata;
  logic [4:0] arg_waddr;
  ubundle_t prog [512];
  logic [63:0] sregs [32];

  mpc #(.UDEPTH(512)) dut (.*);

  assign bundle    = prog[upc];
  assign ctrl_sval = sregs[bundle.ctrl.sreg];
  always @(posedge clk) if (arg_we) sregs[arg_waddr] <= arg_wdata;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int trace[$];
  int stalls = 0;
  always @(posedge clk) begin
    if (commit) trace.push_back(int'(upc));
    if (stall) stalls++;
  end

  initial begin
    int cyc;
    int exp_trace[$];
    cmd_valid = 0; cmd = '0; lsu_done = 1;
    for (int i = 0; i < 512; i++) prog[i] = bnop();
    for (int i = 0; i < 32; i++) sregs[i] = 0;
    // microprogram at 100: loop body at 101..102 runs arg1 times
    prog[100].ctrl = ctl(C_LDC, 1, 1);
    prog[101].ctrl = ctl(C_SEQ);
    prog[101].lsu  = lop(L_LD_NMEM, 1, 0);     // marks the bundle that stalls
    prog[102].ctrl = ctl(C_DJNZ, 1, 0, 101);
    prog[103].ctrl = ctl(C_END);
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    cmd_valid = 1; cmd.upc = 100; cmd.arg0 = 32'h11; cmd.arg1 = 3; cmd.arg2 = 32'h33; cmd.arg3 = 32'h44;
    #1 chk(cmd_ready, "ready when idle");
    @(negedge clk); cmd_valid = 0;
    cyc = 1;
    while (busy) begin
      // hold bundle 101 for one extra cycle each time it comes up
      lsu_done = !(run && upc == 101 && !stall);
      @(negedge clk); cyc++;
      lsu_done = 1;
    end
    exp_trace = '{100, 101, 102, 101, 102, 101, 102, 103};
    chk(trace.size() == exp_trace.size(), $sformatf("commit count %0d", trace.size()));
    foreach (exp_trace[i]) if (i < trace.size()) chk(trace[i] == exp_trace[i], $sformatf("trace[%0d]=%0d", i, trace[i]));
    chk(sregs[0] == 64'h11 && sregs[1] == 3 && sregs[2] == 64'h33 && sregs[3] == 64'h44, "arguments in s0..s3");
    chk(stalls == 3, $sformatf("three held cycles (%0d)", stalls));
    // 1 accept + 4 argument cycles + 8 commits + 3 held cycles
    chk(cyc == 1 + 4 + 8 + 3, $sformatf("cycle count %0d", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
