// tb_result_streamer: sends the results of four particles to a sink that
// drops TREADY at random. Checks the word order (x, y, theta, score per
// particle), TLAST on the last word only, data held stable while stalled,
// the packet length and the done pulse.
//
// The word order is this design's own; the results returned (poses and
// scores) follow the published interface.
module tb_result_streamer;
  import smc_pkg::*;

  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  pose_t [NP-1:0] poses;
  fix_t [NP-1:0] scores;
  logic [31:0] tdata;
  logic tvalid, tready = 0, tlast, done;
  int checks = 0, failures = 0;

  result_streamer #(.N_PAR(NP)) dut (.clk, .rst_n, .start, .poses, .scores, .m_tdata(tdata),
    .m_tvalid(tvalid), .m_tready(tready), .m_tlast(tlast), .done);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] expw [4*NP];
    int got, stalls, dones;
    logic [31:0] prev; logic prev_stall;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int k = 0; k < NP; k++) begin
        poses[k] = '{x: fix_t'($urandom), y: fix_t'($urandom), th: fix_t'($urandom)};
        scores[k] = fix_t'($urandom);
        expw[4*k] = poses[k].x; expw[4*k+1] = poses[k].y; expw[4*k+2] = poses[k].th; expw[4*k+3] = scores[k];
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      got = 0; stalls = 0; dones = 0; prev_stall = 0; prev = 0;
      while (got < 4 * NP) begin
        tready = ($urandom % 3) != 0;
        #1;
        if (prev_stall) begin
          checks++;
          if (!tvalid || tdata !== prev) begin failures++; $display("FAIL data changed while stalled"); end
        end
        if (tvalid && tready) begin
          checks += 2;
          if (tdata !== expw[got]) begin failures++; $display("FAIL word %0d", got); end
          if (tlast !== (got == 4 * NP - 1)) begin failures++; $display("FAIL tlast at %0d", got); end
          got++;
        end
        prev_stall = tvalid && !tready; prev = tdata;
        if (tvalid && !tready) stalls++;
        @(negedge clk);
        if (done) dones++;
      end
      tready = 0;
      repeat (2) begin @(negedge clk); if (done) dones++; end
      checks += 3;
      if (tvalid) begin failures++; $display("FAIL extra word"); end
      if (dones != 1) begin failures++; $display("FAIL done count %0d", dones); end
      if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
