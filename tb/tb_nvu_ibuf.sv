// tb_nvu_ibuf: checks the NVU instruction buffer: order preserved, full
// back-pressure after DEPTH entries, simultaneous push and pop, random
// traffic against a queue model.
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_nvu_ibuf;
  import npe_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  nvu_cmd_t in_cmd, out_cmd;
  nvu_cmd_t q[$];

  nvu_ibuf #(.DEPTH(4)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_cmd = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(!out_valid && in_ready, "empty after reset");
    // fill
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); in_valid = 1; in_cmd = '0; in_cmd.upc = 16'(i);
      q.push_back(in_cmd);
    end
    @(negedge clk); in_valid = 0;
    chk(!in_ready, "full after 4 pushes");
    // random traffic
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      in_valid = 1'($urandom); out_ready = 1'($urandom);
      in_cmd = nvu_cmd_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      if (out_valid) chk(out_cmd == q[0], $sformatf("head order it %0d", it));
      chk(out_valid == (q.size() != 0), "valid matches model");
      chk(in_ready == (q.size() != 4), "ready matches model");
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_cmd);
    end
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
