// tb_stream_loader: sends complete input packets with random gaps in TVALID
// and checks every buffer write the loader makes: each measurement once at
// its address, each pose into the right particle, each map row with the
// right bits into the right particle, then done and TREADY low. A second
// packet without a scan (load_scan = 0) must go straight to the poses.
//
// The stream layout is this design's own; sending the scan once per phase
// follows the published system.
module tb_stream_loader;
  import smc_pkg::*;

  localparam int NP = 2, MS = 64, MAXS = 16, NS = 10, WPR = MS / 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, load_scan = 0;
  logic [15:0] num_scans = NS;
  logic [31:0] tdata = 0;
  logic tvalid = 0, tready, tlast = 0;
  logic scan_we;
  logic [$clog2(MAXS)-1:0] scan_waddr;
  scan_t scan_wdata;
  logic [NP-1:0] pose_we, map_we;
  pose_t pose_wdata;
  logic [$clog2(MS)-1:0] map_wrow;
  logic [MS-1:0] map_wdata;
  logic busy, done;
  int checks = 0, failures = 0;

  stream_loader #(.N_PAR(NP), .MAP_SIZE(MS), .MAX_SCANS(MAXS)) dut (.clk, .rst_n, .start, .load_scan,
    .num_scans, .s_tdata(tdata), .s_tvalid(tvalid), .s_tready(tready), .s_tlast(tlast),
    .scan_we, .scan_waddr, .scan_wdata, .pose_we, .pose_wdata, .map_we, .map_wrow, .map_wdata,
    .busy, .done);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  scan_t sc [NS];
  pose_t ps [NP];
  logic [MS-1:0] mp [NP][MS];
  int n_scan_w, n_pose_w, n_map_w, n_done;

  // write monitor
  always @(negedge clk) begin
    if (rst_n) begin
      if (scan_we) begin
        n_scan_w++; checks++;
        if (scan_wdata !== sc[scan_waddr]) begin failures++; $display("FAIL scan %0d", scan_waddr); end
      end
      for (int k = 0; k < NP; k++) begin
        if (pose_we[k]) begin
          n_pose_w++; checks++;
          if (pose_wdata !== ps[k]) begin failures++; $display("FAIL pose %0d", k); end
        end
        if (map_we[k]) begin
          n_map_w++; checks++;
          if (map_wdata !== mp[k][map_wrow]) begin failures++; $display("FAIL map %0d row %0d", k, map_wrow); end
        end
      end
      if ($onehot0(pose_we) !== 1'b1 || $onehot0(map_we) !== 1'b1) begin failures++; $display("FAIL we"); end
      if (done) n_done++;
    end
  end

  task automatic send(input logic [31:0] w);
    @(negedge clk);
    while ($urandom % 4 == 0) begin tvalid = 0; @(negedge clk); end
    tvalid = 1; tdata = w;
    @(posedge clk);
    while (!tready) @(posedge clk);
    #1 tvalid = 0;
  endtask

  task automatic packet(input bit with_scan);
    for (int i = 0; i < NS; i++) begin sc[i].r = fix_t'($urandom); sc[i].th = fix_t'($urandom); end
    for (int k = 0; k < NP; k++) begin
      ps[k] = '{x: fix_t'($urandom), y: fix_t'($urandom), th: fix_t'($urandom)};
      for (int y = 0; y < MS; y++) for (int j = 0; j < WPR; j++) mp[k][y][32*j +: 32] = $urandom;
    end
    n_scan_w = 0; n_pose_w = 0; n_map_w = 0; n_done = 0;
    @(negedge clk); start = 1; load_scan = with_scan;
    @(negedge clk); start = 0;
    if (with_scan) for (int i = 0; i < NS; i++) begin send(sc[i].r); send(sc[i].th); end
    for (int k = 0; k < NP; k++) begin
      send(ps[k].x); send(ps[k].y); send(ps[k].th);
      for (int y = 0; y < MS; y++) for (int j = 0; j < WPR; j++) send(mp[k][y][32*j +: 32]);
    end
    repeat (3) @(negedge clk);
    checks += 5;
    if (n_scan_w != (with_scan ? NS : 0)) begin failures++; $display("FAIL scan writes %0d", n_scan_w); end
    if (n_pose_w != NP) begin failures++; $display("FAIL pose writes %0d", n_pose_w); end
    if (n_map_w != NP * MS) begin failures++; $display("FAIL map writes %0d", n_map_w); end
    if (n_done != 1) begin failures++; $display("FAIL done %0d", n_done); end
    if (tready || busy) begin failures++; $display("FAIL still ready"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    packet(1);
    packet(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
