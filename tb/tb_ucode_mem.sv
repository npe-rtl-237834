// tb_ucode_mem: checks the microprogram memory: bundles written through the
// load port read back (combinationally) at their addresses.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_ucode_mem;
  import npe_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we;
  logic [5:0] waddr, raddr;
  ubundle_t wdata, rdata;
  ubundle_t mdl [64];

  ucode_mem #(.DEPTH(64)) dut (.*);

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a);
      wdata = ubundle_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      mdl[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 63; a >= 0; a--) begin
      raddr = 6'(a); #1;
      checks++;
      if (rdata !== mdl[a]) begin failures++; $display("FAIL bundle %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
