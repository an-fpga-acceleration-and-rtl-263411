// tb_axil_regs: AXI4-Lite register file. Checks the reset values, write and
// read-back of every register (address and data in either order, with
// stalls on the response channels), byte strobes, the start pulse with
// load_scan, start being ignored while the core is busy, and the sticky done
// bit that start clears.
//
// Register addresses and reset values are this design's own; the iteration
// count of 25 follows the published configuration.
module tb_axil_regs;
  import smc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 0;
  logic [1:0] bresp, rresp;
  params_t params;
  lut_t lut;
  logic load_scan, start, core_busy = 0, core_done = 0;
  int checks = 0, failures = 0, starts = 0;

  axil_regs dut (.clk, .rst_n, .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp),
    .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .params, .lut, .load_scan, .start, .core_busy, .core_done);

  always @(negedge clk) if (start) starts++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input logic [3:0] s, input int order);
    @(negedge clk);
    if (order != 2) begin awvalid = 1; awaddr = a; end
    if (order != 1) begin wvalid = 1; wdata = d; wstrb = s; end
    if (order == 1) begin
      while (!awready) @(negedge clk);
      @(negedge clk); awvalid = 0; wvalid = 1; wdata = d; wstrb = s;
    end else if (order == 2) begin
      while (!wready) @(negedge clk);
      @(negedge clk); wvalid = 0; awvalid = 1; awaddr = a;
    end
    @(posedge clk); #1;
    while (!bvalid) begin @(posedge clk); #1; end
    awvalid = 0; wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    @(negedge clk); bready = 1;
    @(negedge clk); bready = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    arvalid = 1; araddr = a;
    while (!arready) @(negedge clk);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    repeat ($urandom % 3) @(negedge clk);
    d = rdata; rready = 1;
    @(negedge clk); rready = 0;
  endtask

  task automatic expect_rd(input logic [7:0] a, input logic [31:0] e);
    logic [31:0] d;
    rd(a, d);
    checks++;
    if (d !== e) begin failures++; $display("FAIL read %h got %h exp %h", a, d, e); end
  endtask

  initial begin
    logic [31:0] vals [17];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values
    expect_rd(8'h04, 32'd25);
    expect_rd(8'h14, 32'd1310720);
    expect_rd(8'h18, 32'd3277);
    expect_rd(8'h20, 32'd4634);
    expect_rd(8'h24, 32'd24109);
    expect_rd(8'h34, 32'd65536);
    expect_rd(8'h00, 32'h4);              // idle
    // write / read back every register
    for (int i = 1; i <= 17; i++) begin
      vals[i - 1] = (i <= 2) ? ($urandom & 32'hffff) : $urandom;
      wr(8'(4 * i), vals[i - 1], 4'hf, i % 3);
    end
    for (int i = 1; i <= 17; i++) expect_rd(8'(4 * i), vals[i - 1]);
    checks += 3;
    if (params.num_iters !== vals[0][15:0] || params.inv_res !== fix_t'(vals[4])) begin
      failures++; $display("FAIL params outputs");
    end
    if (lut[8] !== fix_t'(vals[16]) || lut[0] !== fix_t'(vals[8])) begin failures++; $display("FAIL lut outputs"); end
    // byte strobe
    wr(8'h0C, 32'hAABBCCDD, 4'b0101, 0);
    if (params.origin_x !== fix_t'({vals[2][31:24], 8'hBB, vals[2][15:8], 8'hDD})) begin
      failures++; $display("FAIL strobe %h", params.origin_x);
    end
    // start with load_scan
    wr(8'h00, 32'h9, 4'h1, 0);
    checks += 2;
    if (starts != 1 || load_scan !== 1'b1) begin failures++; $display("FAIL start/load_scan"); end
    core_busy = 1;
    expect_rd(8'h00, 32'h9);
    wr(8'h00, 32'h1, 4'h1, 0);            // ignored while busy, clears load_scan
    if (starts != 1) begin failures++; $display("FAIL start while busy"); end
    @(negedge clk); core_busy = 0; core_done = 1;
    @(negedge clk); core_done = 0;
    expect_rd(8'h00, 32'h6);              // done + idle
    wr(8'h00, 32'h1, 4'h1, 1);
    expect_rd(8'h00, 32'h4);              // done cleared
    checks++;
    if (starts != 2) begin failures++; $display("FAIL second start"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
