// tb_mwu: checks the memory write unit with a real NMEM (the LSU side
// driven by the testbench) and the external memory model: rows of NMEM
// reach external memory as VRWIDTH/EXT_W beats per row under random write
// back-pressure, and the MWU waits for NMEM grants while the LSU side is
// busy. Reduced size: VRWIDTH 512 (two beats per row).
//
// The behaviour checked here is this design's implementation of the unit;
// where the published design is silent (encodings, widths, handshakes) the
// expected values follow this design's own choices, computed independently
// in the testbench.
module tb_mwu;
  import npe_pkg::*;
  import npe_tb_pkg::*;
  localparam int VRWIDTH = 512, NB = VRWIDTH / 16, DEPTH = 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge resets the asynchronous flops at once
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, busy;
  mwu_cmd_t cmd;
  logic nmem_req, nmem_gnt, nmem_rvalid;
  logic [3:0] nmem_row;
  logic [VRWIDTH-1:0] nmem_rdata;
  logic ext_wr_valid, ext_wr_ready;
  logic [31:0] ext_wr_addr;
  logic [EXT_W-1:0] ext_wr_data;

  mwu #(.VRWIDTH(VRWIDTH), .NMEM_DEPTH(DEPTH)) dut (.*);

  logic lsu_req, lsu_we, lsu_done, lc, lw;
  logic [NB-1:0][31:0] lsu_addr;
  logic [NB-1:0][15:0] lsu_wdata, lsu_rdata;
  nmem #(.VRWIDTH(VRWIDTH), .DEPTH(DEPTH)) u_nmem (
    .clk, .rst_n, .lsu_req, .lsu_we, .lsu_addr, .lsu_wdata, .lsu_done, .lsu_rdata,
    .lsu_conflict (lc), .lsu_wait (lw),
    .mwu_req (nmem_req), .mwu_row (nmem_row), .mwu_gnt (nmem_gnt),
    .mwu_rvalid (nmem_rvalid), .mwu_rdata (nmem_rdata));

  ext_mem_model #(.DEPTH(256), .LAT(2), .STALLS(1)) mem (
    .clk, .rd_req_valid (1'b0), .rd_req_ready (), .rd_addr (32'd0), .rd_resp_valid (), .rd_resp_data (),
    .wr_valid (ext_wr_valid), .wr_ready (ext_wr_ready), .wr_addr (ext_wr_addr), .wr_data (ext_wr_data));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [VRWIDTH-1:0] rows [DEPTH];
  int waits = 0;
  always @(posedge clk) if (nmem_req && !nmem_gnt) waits++;

  initial begin
    cmd_valid = 0; cmd = '0; lsu_req = 0; lsu_we = 0; lsu_addr = '0; lsu_wdata = '0;
    for (int i = 0; i < 256; i++) mem.mem[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // fill NMEM through the LSU side
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk); lsu_req = 1; lsu_we = 1;
      for (int l = 0; l < NB; l++) begin lsu_addr[l] = 32'(r * NB + l); lsu_wdata[l] = 16'($urandom); end
      rows[r] = lsu_wdata;
    end
    @(negedge clk); lsu_req = 0;
    // copy rows 3..8 to external address 20 while the LSU keeps reading
    @(negedge clk); cmd_valid = 1; cmd = '{ext_addr: 32'd20, rows: 16'd6, nmem_row: 16'd3};
    @(negedge clk); cmd_valid = 0;
    lsu_we = 0;
    for (int l = 0; l < NB; l++) lsu_addr[l] = 32'(l);
    repeat (10) begin
      lsu_req = 1;
      @(negedge clk);
      while (!lsu_done) @(negedge clk);
    end
    lsu_req = 0;
    while (busy) @(negedge clk);
    for (int r = 0; r < 6; r++)
      for (int b = 0; b < VRWIDTH / EXT_W; b++)
        chk(mem.mem[20 + r * 2 + b] == rows[3 + r][b*EXT_W +: EXT_W], $sformatf("row %0d beat %0d", r, b));
    chk(mem.writes == 12, "12 beats written");
    chk(mem.wr_stalls > 0, "write back-pressure exercised");
    chk(waits > 0, "MWU waited for an NMEM grant");
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
