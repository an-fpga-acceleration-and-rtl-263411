// tb_scan_score_unit: scores candidate poses against a simulated room.
//
// A 64 x 64 local map (walls and pillars) is loaded into local_map_bram and a
// ray-marched 90-beam scan into scan_buffer. The unit scores the true pose,
// shifted and rotated poses and a pose whose endpoints partly leave the
// local map. Score, number of matched beams and number of beams outside the
// map are compared with the reference model, and the real-valued sanity check
// requires the true pose to score higher than every shifted one. The cycle
// count from start to done (both included) must be num_scans + CORDIC_ITER + 9 for every
// pose, and an empty scan must finish with score 0.
//
// The score sum follows the published method; the scene and the pipelined
// latency are this design's own.
module tb_scan_score_unit;
  import smc_pkg::*;
  import smc_ref_pkg::*;

  localparam int W = 32, MS = 2 * W, NS = 90, MAXS = 128;
  localparam int LAT_CONST = CORDIC_ITER + 9;   // counted from the start cycle, both ends included

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  pose_t pose;
  params_t pr;
  lut_t lut;
  logic signed [31:0] cx0, cy0;
  logic s_rd_en, m_rd_en, busy, done;
  logic [$clog2(MAXS)-1:0] s_rd_addr;
  scan_t s_rd_data;
  logic signed [31:0] hcx, hcy, mcx, mcy;
  win_t hwin, mwin;
  fix_t score;
  logic [15:0] n_matched, n_outside;

  // buffer write side
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
  scan_score_unit #(.MAP_SIZE(MS), .MAX_SCANS(MAXS)) dut (.clk, .rst_n, .start, .pose,
    .origin_x(pr.origin_x), .origin_y(pr.origin_y), .inv_res(pr.inv_res), .free_delta(pr.free_delta),
    .num_scans(pr.num_scans), .cx0, .cy0, .lut, .scan_rd_en(s_rd_en), .scan_rd_addr(s_rd_addr),
    .scan_rd_data(s_rd_data), .map_rd_en(m_rd_en), .hit_cx(hcx), .hit_cy(hcy), .miss_cx(mcx),
    .miss_cy(mcy), .hit_win(hwin), .miss_win(mwin), .busy, .done, .score, .n_matched, .n_outside);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic eval(input pose_t p, output fix_t s, output int cycles);
    int c;
    @(negedge clk);
    pose = p; start = 1;
    @(negedge clk);
    start = 0; c = 1;
    while (!done) begin @(negedge clk); c++; end
    s = score; cycles = c;
  endtask

  function automatic void ref_counts(input pose_t p, output int nm, output int no);
    nm = 0; no = 0;
    for (int i = 0; i < int'(pr.num_scans); i++) begin
      int hx, hy, mx, my; bit f, inm; fix_t v;
      cells(p, refscan[i], pr, cx0, cy0, hx, hy, mx, my);
      inm = hx >= 0 && hy >= 0 && hx < MS && hy < MS;
      v = beam_score(window(0, MS, hx, hy), window(0, MS, mx, my), inm, lut, f);
      nm += int'(f); no += int'(!inm);
    end
  endfunction

  initial begin
    pose_t truep, p;
    fix_t s_true, s, e;
    int cyc, nm, no, outside_seen;
    pr = '0;
    pr.inv_res = 32'sd1310720; pr.free_delta = 32'sd4634; pr.num_scans = NS;
    lut = LUT_DEFAULT;
    cx0 = 100; cy0 = 50;
    make_room(0, MS, 6, 8, 7);
    make_scan(0, MS, 1.61, 1.57, 0.3, NS, 0.05);
    truep.x = to_fix(100 * 0.05 + 1.61); truep.y = to_fix(50 * 0.05 + 1.57); truep.th = to_fix(0.3);
    s_waddr = 0; s_wdata = 0; m_wrow = 0; m_wdata = 0; pose = truep;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      @(negedge clk); s_we = 1; s_waddr = i[$clog2(MAXS)-1:0]; s_wdata = refscan[i];
    end
    for (int y = 0; y < MS; y++) begin
      @(negedge clk); s_we = 0; m_we = 1; m_wrow = y[$clog2(MS)-1:0];
      for (int x = 0; x < MS; x++) m_wdata[x] = refmap[0][y][x];
    end
    @(negedge clk); m_we = 0;

    outside_seen = 0;
    eval(truep, s_true, cyc);
    for (int t = 0; t < 12; t++) begin
      p = truep;
      case (t % 6)
        0: p.x += to_fix(0.05 * (t / 6 + 1));
        1: p.x -= to_fix(0.05 * (t / 6 + 1));
        2: p.y += to_fix(0.05 * (t / 6 + 1));
        3: p.y -= to_fix(0.05 * (t / 6 + 1));
        4: p.th += to_fix(0.05 * (t / 6 + 1));
        5: p.th -= to_fix(0.05 * (t / 6 + 1));
      endcase
      if (t == 11) p.x -= to_fix(1.0);     // endpoints leave the local map
      eval(p, s, cyc);
      e = smc_ref_pkg::score(0, MS, p, pr, lut, cx0, cy0);
      ref_counts(p, nm, no);
      checks += 5;
      if (s !== e) begin failures++; $display("FAIL score t%0d got %0d exp %0d", t, s, e); end
      if (n_matched !== 16'(nm) || n_outside !== 16'(no)) begin
        failures++; $display("FAIL counts t%0d got %0d/%0d exp %0d/%0d", t, n_matched, n_outside, nm, no);
      end
      if (cyc != NS + LAT_CONST) begin failures++; $display("FAIL cycles %0d", cyc); end
      if (s >= s_true) begin failures++; $display("FAIL shifted pose t%0d scores %0d >= true %0d", t, s, s_true); end
      if (no > 0) outside_seen++;
      if (t == 11 && no == 0) begin failures++; $display("FAIL no beam left the map"); end
    end
    checks += 2;
    e = smc_ref_pkg::score(0, MS, truep, pr, lut, cx0, cy0);
    if (s_true !== e) begin failures++; $display("FAIL true score %0d exp %0d", s_true, e); end
    if (s_true < fix_t'(NS / 2) * 65536) begin failures++; $display("FAIL true score low %0d", s_true); end
    $display("true-pose score %0.3f of %0d beams", to_real(s_true), NS);
    // empty scan
    pr.num_scans = 0;
    eval(truep, s, cyc);
    checks++;
    if (s !== 0) begin failures++; $display("FAIL empty scan"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
