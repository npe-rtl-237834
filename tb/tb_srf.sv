// tb_srf: checks the scalar register file: reset to zero, 3 write ports,
// 8 read ports, highest write port wins a collision.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_srf;
  localparam int N_VREG = 32, VRWIDTH = 64;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0][4:0] raddr;
  logic [7:0][VRWIDTH-1:0] rdata;
  logic [2:0] we;
  logic [2:0][4:0] waddr;
  logic [2:0][VRWIDTH-1:0] wdata;
  logic [VRWIDTH-1:0] mdl [N_VREG];

  srf #(.N_SREG(N_VREG), .N_RD(8), .N_WR(3)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int r = 0; r < N_VREG; r++) mdl[r] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int p = 0; p < 8; p++) raddr[p] = 5'(p * 3);
    #1 for (int p = 0; p < 8; p++) chk(rdata[p] == '0, "reset value");
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      for (int p = 0; p < 3; p++) begin
        we[p] = 1'($urandom);
        waddr[p] = 5'($urandom % 8);    // small range forces collisions
        wdata[p] = {$urandom, $urandom};
      end
      for (int p = 0; p < 3; p++) if (we[p]) mdl[waddr[p]] = wdata[p];
      @(negedge clk); we = 0;
      for (int p = 0; p < 8; p++) raddr[p] = 5'($urandom % 8);
      #1 for (int p = 0; p < 8; p++) chk(rdata[p] == mdl[raddr[p]], $sformatf("it %0d port %0d", it, p));
    end
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
