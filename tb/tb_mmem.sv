// tb_mmem: checks the MMU scratchpad: full-row writes, VRWIDTH-slice reads
// (vector address = row * VEC_PER_ROW + slice), one-cycle read latency.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_mmem;
  localparam int N_OUT = 8, VRWIDTH = 64, DEPTH = 16;
  localparam int ROW_W = N_OUT * 16, VPR = ROW_W / VRWIDTH;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, rd_en;
  logic [3:0] waddr;
  logic [ROW_W-1:0] wdata;
  logic [15:0] raddr;
  logic [VRWIDTH-1:0] rdata;
  logic [ROW_W-1:0] ref_rows [DEPTH];

  mmem #(.N_OUT(N_OUT), .VRWIDTH(VRWIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    we = 0; rd_en = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk); we = 1; waddr = 4'(r);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      ref_rows[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int v = 0; v < DEPTH * VPR; v++) begin
      @(negedge clk); rd_en = 1; raddr = 16'(v);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rdata != ref_rows[v / VPR][(v % VPR) * VRWIDTH +: VRWIDTH]) begin
        failures++; $display("FAIL vector %0d", v);
      end
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
