// tb_scan_buffer: writes random measurements to every address and reads
// them back in a different order, checking data and the one-cycle read
// latency.
//
// Depth and read timing are this design's own choices.
module tb_scan_buffer;
  import smc_pkg::*;

  localparam int N = 64;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, rd_en = 0;
  logic [$clog2(N)-1:0] wr_addr, rd_addr;
  scan_t wr_data, rd_data;
  scan_t model [N];
  int checks = 0, failures = 0;

  scan_buffer #(.MAX_SCANS(N)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = i[$clog2(N)-1:0];
      wr_data = '{r: fix_t'($urandom), th: fix_t'($urandom)};
      model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < N; i++) begin
      int a;
      a = (i * 37 + 5) % N;
      @(negedge clk);
      rd_en = 1; rd_addr = a[$clog2(N)-1:0];
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== model[a]) begin
        failures++;
        $display("FAIL addr %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
