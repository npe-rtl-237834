// tb_mib: checks the MMU input buffer.
// Writes activation and weight words through both write ports (MRU and NVU
// paths), reads them back through the MMU port one cycle later and checks
// the port-1-wins rule on a same-word collision. Reduced sizes: 4 PEs.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_mib;
  import npe_pkg::*;
  localparam int N_PE = 4, PE_LANES = 16, DW = 16, VRWIDTH = 512;
  localparam int ACT_W = PE_LANES * DW;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic p0_we, p0_wsel, p1_we, p1_wsel, rd_en;
  logic [1:0] p0_bank, p1_bank;
  logic [15:0] p0_addr, p1_addr;
  logic [EXT_W-1:0] p0_data;
  logic [VRWIDTH-1:0] p1_data;
  logic [5:0] rd_act_addr;
  logic [3:0] rd_w_addr;
  logic [ACT_W-1:0] rd_act;
  logic [N_PE-1:0][EXT_W-1:0] rd_w;

  mib #(.N_PE(N_PE), .PE_LANES(PE_LANES), .DW(DW), .VRWIDTH(VRWIDTH), .ACT_DEPTH(64), .W_DEPTH(16)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [EXT_W-1:0] pat(int s);
    logic [EXT_W-1:0] v;
    for (int i = 0; i < EXT_W / 32; i++) v[i*32 +: 32] = 32'(s * 7919 + i * 104729);
    return v;
  endfunction

  task automatic rd(int aa, int wa);
    @(negedge clk); rd_en = 1; rd_act_addr = 6'(aa); rd_w_addr = 4'(wa);
    @(negedge clk); rd_en = 0;
  endtask

  initial begin
    p0_we = 0; p1_we = 0; rd_en = 0; p0_wsel = 0; p1_wsel = 0;
    p0_bank = 0; p1_bank = 0; p0_addr = 0; p1_addr = 0; p0_data = 0; p1_data = 0;
    rd_act_addr = 0; rd_w_addr = 0;
    // port 0: activation words 0..7 and weight word 3 in every bank
    for (int a = 0; a < 8; a++) begin
      @(negedge clk); p0_we = 1; p0_wsel = 0; p0_addr = 16'(a); p0_data = pat(a);
    end
    for (int b = 0; b < N_PE; b++) begin
      @(negedge clk); p0_we = 1; p0_wsel = 1; p0_bank = 2'(b); p0_addr = 3; p0_data = pat(100 + b);
    end
    @(negedge clk); p0_we = 0;
    for (int a = 0; a < 8; a++) begin
      rd(a, 3);
      chk(rd_act == pat(a), $sformatf("act word %0d", a));
      for (int b = 0; b < N_PE; b++) chk(rd_w[b] == pat(100 + b), $sformatf("weight bank %0d", b));
    end
    // port 1: one 512-bit vector = two activation words at 20,21
    @(negedge clk); p1_we = 1; p1_wsel = 0; p1_addr = 20; p1_data = {pat(51), pat(50)};
    // port 1: weight vector into banks 2,3 at word 5
    @(negedge clk); p1_wsel = 1; p1_bank = 2; p1_addr = 5; p1_data = {pat(61), pat(60)};
    @(negedge clk); p1_we = 0;
    rd(20, 5);
    chk(rd_act == pat(50), "p1 act word 20");
    chk(rd_w[2] == pat(60) && rd_w[3] == pat(61), "p1 weight banks 2,3");
    rd(21, 5);
    chk(rd_act == pat(51), "p1 act word 21");
    // collision: both ports write activation word 30
    @(negedge clk); p0_we = 1; p0_wsel = 0; p0_addr = 30; p0_data = pat(1);
    p1_we = 1; p1_wsel = 0; p1_addr = 30; p1_data = {pat(3), pat(2)};
    @(negedge clk); p0_we = 0; p1_we = 0;
    rd(30, 0);
    chk(rd_act == pat(2), "port 1 wins collision");
    // read is synchronous: data holds while rd_en is low
    @(negedge clk); rd_act_addr = 0;
    @(negedge clk);
    chk(rd_act == pat(2), "read data held without rd_en");
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
