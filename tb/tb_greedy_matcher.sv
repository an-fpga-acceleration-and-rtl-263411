// tb_greedy_matcher: one submodule refining a perturbed pose in a simulated
// room (64 x 64 local map, 90-beam ray-marched scan).
//
// For several initial guesses and iteration counts the refined pose, final
// score and the numbers of improving and step-halving iterations must match
// the reference model exactly. As a real-world sanity check the refined pose
// must land within one cell and 0.05 rad of the pose the scan was taken
// from. The latency must be the same for every guess and equal to
//   (num_scans + CORDIC_ITER + 13) + num_iters * (6*(num_scans + CORDIC_ITER + 11) + 1)
// (start cycle to done cycle, both included), which is data independent as
// the fixed iteration count intends.
//
// Scenes, guesses and tolerances are this testbench's own; the constant
// latency is what the published fixed iteration count is for.
module tb_greedy_matcher;
  import smc_pkg::*;
  import smc_ref_pkg::*;

  localparam int W = 32, MS = 2 * W, NS = 90, MAXS = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  pose_t init_pose, pose_out;
  params_t pr;
  lut_t lut;
  logic s_rd_en, m_rd_en, busy, done;
  logic [$clog2(MAXS)-1:0] s_rd_addr;
  scan_t s_rd_data;
  logic signed [31:0] hcx, hcy, mcx, mcy;
  win_t hwin, mwin;
  fix_t score_out;
  logic [15:0] n_improve, n_halve;

  logic s_we = 0, m_we = 0;
  logic [$clog2(MAXS)-1:0] s_waddr;
  scan_t s_wdata;
  logic [$clog2(MS)-1:0] m_wrow;
  logic [MS-1:0] m_wdata;

  int checks = 0, failures = 0;

  scan_buffer #(.MAX_SCANS(MAXS)) u_sb (.clk, .wr_en(s_we), .wr_addr(s_waddr), .wr_data(s_wdata),
    .rd_en(s_rd_en), .rd_addr(s_rd_addr), .rd_data(s_rd_data));
  local_map_bram #(.MAP_SIZE(MS)) u_map (.clk, .wr_en(m_we), .wr_row(m_wrow), .wr_data(m_wdata),
    .rd_en_a(m_rd_en), .cx_a(hcx), .cy_a(hcy), .win_a(hwin),
    .rd_en_b(m_rd_en), .cx_b(mcx), .cy_b(mcy), .win_b(mwin));
  greedy_matcher #(.W(W), .MAX_SCANS(MAXS)) dut (.clk, .rst_n, .start, .init_pose, .params(pr), .lut,
    .scan_rd_en(s_rd_en), .scan_rd_addr(s_rd_addr), .scan_rd_data(s_rd_data), .map_rd_en(m_rd_en),
    .hit_cx(hcx), .hit_cy(hcy), .miss_cx(mcx), .miss_cy(mcy), .hit_win(hwin), .miss_win(mwin),
    .busy, .done, .pose_out, .score_out, .n_improve, .n_halve);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_scene(input real tx, input real ty, input real tth, input int unsigned seed);
    make_room(0, MS, 5, 10, seed);
    make_scan(0, MS, tx, ty, tth, NS, 0.05);
    for (int i = 0; i < NS; i++) begin
      @(negedge clk); s_we = 1; s_waddr = i[$clog2(MAXS)-1:0]; s_wdata = refscan[i];
    end
    for (int y = 0; y < MS; y++) begin
      @(negedge clk); s_we = 0; m_we = 1; m_wrow = y[$clog2(MS)-1:0];
      for (int x = 0; x < MS; x++) m_wdata[x] = refmap[0][y][x];
    end
    @(negedge clk); m_we = 0;
  endtask

  int lat_first = -1;
  int total_imp = 0, total_half = 0;

  task automatic run(input pose_t ip, input real true_x, input real true_y, input real true_th,
                     input int iters);
    pose_t ep; fix_t es; int ei, eh, c, expc;
    pr.num_iters = 16'(iters);
    @(negedge clk);
    init_pose = ip; start = 1;
    @(negedge clk);
    start = 0; c = 1;
    while (!done) begin @(negedge clk); c++; end
    greedy(0, W, ip, pr, lut, ep, es, ei, eh);
    total_imp += ei; total_half += eh;
    checks += 4;
    if (pose_out !== ep || score_out !== es) begin
      failures++;
      $display("FAIL pose/score got (%0d,%0d,%0d) %0d exp (%0d,%0d,%0d) %0d", pose_out.x, pose_out.y,
               pose_out.th, score_out, ep.x, ep.y, ep.th, es);
    end
    if (n_improve !== 16'(ei) || n_halve !== 16'(eh)) begin
      failures++; $display("FAIL counts got %0d/%0d exp %0d/%0d", n_improve, n_halve, ei, eh);
    end
    expc = (NS + CORDIC_ITER + 13) + iters * (6 * (NS + CORDIC_ITER + 11) + 1);
    if (c != expc) begin failures++; $display("FAIL latency %0d exp %0d", c, expc); end
    if (iters >= 10) begin
      if (rabs(to_real(pose_out.x) - true_x) > 0.05 || rabs(to_real(pose_out.y) - true_y) > 0.05 ||
          rabs(to_real(pose_out.th) - true_th) > 0.05) begin
        failures++;
        $display("FAIL refined pose %f %f %f far from true %f %f %f", to_real(pose_out.x),
                 to_real(pose_out.y), to_real(pose_out.th), true_x, true_y, true_th);
      end
    end else checks--;
    $display("iters=%0d cycles=%0d improved=%0d halved=%0d score=%0.3f", iters, c, ei, eh, to_real(score_out));
  endtask

  initial begin
    pose_t ip;
    int cx0, cy0;
    real ox, oy, twx, twy, tth;
    pr = '0;
    pr.inv_res = 32'sd1310720; pr.free_delta = 32'sd4634; pr.num_scans = NS;
    pr.lin_step = 32'sd3277; pr.ang_step = 32'sd3277;
    ox = -5.0; oy = -2.5;
    pr.origin_x = to_fix(ox); pr.origin_y = to_fix(oy);
    lut = LUT_DEFAULT;
    s_waddr = 0; s_wdata = 0; m_wrow = 0; m_wdata = 0; init_pose = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // initial guess at world (3.3, 1.2, 0.2); true pose is offset from it
    ip.x = to_fix(3.3); ip.y = to_fix(1.2); ip.th = to_fix(0.2);
    corner(ip, pr, W, cx0, cy0);
    twx = 3.3 - 0.08; twy = 1.2 + 0.06; tth = 0.2 + 0.04;
    load_scene(twx - ox - cx0 * 0.05, twy - oy - cy0 * 0.05, tth, 11);
    run(ip, twx, twy, tth, 0);
    run(ip, twx, twy, tth, 1);
    run(ip, twx, twy, tth, 25);
    ip.x = to_fix(3.3 + 0.03); ip.th = to_fix(0.2 - 0.02);
    run(ip, twx, twy, tth, 25);

    // second scene
    ip.x = to_fix(-1.7); ip.y = to_fix(0.45); ip.th = to_fix(-2.9);
    corner(ip, pr, W, cx0, cy0);
    twx = -1.7 + 0.1; twy = 0.45 + 0.02; tth = -2.9 - 0.06;
    load_scene(twx - ox - cx0 * 0.05, twy - oy - cy0 * 0.05, tth, 23);
    run(ip, twx, twy, tth, 25);

    checks += 2;
    if (total_imp == 0) begin failures++; $display("FAIL no improving iteration"); end
    if (total_half == 0) begin failures++; $display("FAIL no step halving"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
