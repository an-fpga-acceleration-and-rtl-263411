// tb_local_map_bram: loads a random binary map row by row, then reads 3x3
// windows on both ports at random centres (inside, on the edges and
// outside) and compares them with windows cut from the plain map, i.e.
// checks that the tripled layout returns the same window in one read.
//
// The one-read window of the tripled layout follows the published memory
// layout; map size and random patterns are this testbench's own.
module tb_local_map_bram;
  import smc_pkg::*;
  import smc_ref_pkg::*;

  localparam int MS = 64;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, rd_en_a = 0, rd_en_b = 0;
  logic [$clog2(MS)-1:0] wr_row;
  logic [MS-1:0] wr_data;
  logic signed [31:0] cx_a, cy_a, cx_b, cy_b;
  win_t win_a, win_b;
  int checks = 0, failures = 0;

  local_map_bram #(.MAP_SIZE(MS)) dut (.clk, .wr_en, .wr_row, .wr_data,
    .rd_en_a, .cx_a, .cy_a, .win_a, .rd_en_b, .cx_b, .cy_b, .win_b);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_row = 0; wr_data = 0; cx_a = 0; cy_a = 0; cx_b = 0; cy_b = 0;
    for (int y = 0; y < MS; y++)
      for (int x = 0; x < MS; x++) refmap[0][y][x] = ($urandom % 3) == 0;
    for (int y = 0; y < MS; y++) begin
      @(negedge clk);
      wr_en = 1; wr_row = y[$clog2(MS)-1:0];
      for (int x = 0; x < MS; x++) wr_data[x] = refmap[0][y][x];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 3000; i++) begin
      int ax, ay, bx, by;
      ax = int'($urandom % (MS + 4)) - 2; ay = int'($urandom % (MS + 4)) - 2;
      bx = int'($urandom % (MS + 4)) - 2; by = int'($urandom % (MS + 4)) - 2;
      if (i < 4) begin ax = (i % 2) * (MS - 1); ay = (i / 2) * (MS - 1); end
      @(negedge clk);
      rd_en_a = 1; rd_en_b = 1; cx_a = ax; cy_a = ay; cx_b = bx; cy_b = by;
      @(negedge clk);
      rd_en_a = 0; rd_en_b = 0;
      checks += 2;
      if (win_a !== window(0, MS, ax, ay)) begin
        failures++; $display("FAIL a (%0d,%0d) got %b exp %b", ax, ay, win_a, window(0, MS, ax, ay));
      end
      if (win_b !== window(0, MS, bx, by)) begin
        failures++; $display("FAIL b (%0d,%0d) got %b exp %b", bx, by, win_b, window(0, MS, bx, by));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
