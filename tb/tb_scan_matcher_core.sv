// tb_scan_matcher_core: end-to-end test of the scan matcher core at its
// default size (two submodules, 256 x 256 local maps, up to 512 beams).
//
// A world of 0.05 m cells holds a 16 m x 6 m room with pillars. A 180-beam,
// 180-degree scan is ray-marched from a true robot pose. Four particles
// guess the pose with different errors; for each, the host side cuts the
// 256 x 256 local map around the cell of its guess from the world map
// (already binary, 1 = occupied). Like the host driver, the test programs the
// registers over AXI4-Lite and runs two invocations of two particles each:
// the first sends the scan, the second reuses it (load_scan = 0).
//
// Checks: every refined pose and score against the reference model, every
// refined pose within two cells and 0.05 rad of the true pose, identical
// compute latency in both invocations matching the submodule formula, and
// the CTRL done/idle bits. The input stream has random gaps and the output
// sink random back-pressure. The mechanisms of the design are counted and
// each must occur: pose improvements, step halvings, beams whose endpoint
// leaves the local map, matches vetoed by an occupied missed cell, scan
// reuse, input stalls and output back-pressure.
//
// The flow (parameters over AXI4-Lite, scan sent once per phase, N = 2
// particles per call, 25 iterations, 256 x 256 local maps) follows the
// published system; the scene and the tolerance of two cells are this
// testbench's own.
module tb_scan_matcher_core;
  import smc_pkg::*;
  import smc_ref_pkg::*;

  localparam int W = 128, MS = 2 * W, NP = 2, NS = 180, ITERS = 25;
  localparam real DELTA = 0.05;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 0;
  logic [1:0] bresp, rresp;
  logic [31:0] s_tdata = 0, m_tdata;
  logic s_tvalid = 0, s_tready, s_tlast = 0, m_tvalid, m_tready = 0, m_tlast;

  scan_matcher_core dut (.clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tlast(m_tlast));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- world map
  localparam int GX0 = 40, GX1 = 360, GY0 = 60, GY1 = 180;   // room walls (world cells)
  int pil_x [8] = '{100, 150, 210, 260, 300, 120, 230, 330};
  int pil_y [8] = '{ 90, 150, 100, 160,  80, 130, 120, 140};

  function automatic bit world(input int gx, input int gy);
    if ((gx == GX0 || gx == GX1) && gy >= GY0 && gy <= GY1) return 1;
    if ((gy == GY0 || gy == GY1) && gx >= GX0 && gx <= GX1) return 1;
    for (int p = 0; p < 8; p++)
      if (gx >= pil_x[p] && gx <= pil_x[p] + 2 && gy >= pil_y[p] && gy <= pil_y[p] + 2) return 1;
    return 0;
  endfunction

  // world origin (cell 0,0) in metres
  localparam real OX = -2.0, OY = -3.0;

  // ---------------------------------------------------------- AXI helpers
  task automatic axil_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awvalid = 1; awaddr = a; wvalid = 1; wdata = d; wstrb = 4'hf;
    @(posedge clk); #1;
    while (!bvalid) begin @(posedge clk); #1; end
    awvalid = 0; wvalid = 0;
    @(negedge clk); bready = 1;
    @(negedge clk); bready = 0;
  endtask

  task automatic axil_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    arvalid = 1; araddr = a;
    while (!arready) @(negedge clk);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata; rready = 1;
    @(negedge clk); rready = 0;
  endtask

  int in_stalls = 0, out_stalls = 0;

  task automatic send(input logic [31:0] w);
    @(negedge clk);
    if ($urandom % 16 == 0) begin s_tvalid = 0; in_stalls++; @(negedge clk); end
    s_tvalid = 1; s_tdata = w;
    @(posedge clk);
    while (!s_tready) @(posedge clk);
    #1 s_tvalid = 0;
  endtask

  // ------------------------------------------------------------ scenario
  pose_t guess [4];
  params_t pr;
  lut_t lut;
  real tx, ty, tth;
  int n_imp = 0, n_half = 0, n_out = 0, n_veto = 0, n_reuse = 0;
  int run_lat [2];

  // local map of particle k (slot s of refmap) from the world map
  task automatic cut_map(input int slot, input pose_t g);
    int cx0, cy0;
    corner(g, pr, W, cx0, cy0);
    for (int y = 0; y < MS; y++)
      for (int x = 0; x < MS; x++) refmap[slot][y][x] = world(cx0 + x, cy0 + y);
  endtask

  // counts of the final pose's beams that leave the map or are vetoed
  task automatic count_beams(input int slot, input pose_t g, input pose_t p);
    int cx0, cy0;
    corner(g, pr, W, cx0, cy0);
    for (int i = 0; i < NS; i++) begin
      int hx, hy, mx, my; bit f, inm; fix_t v; win_t hw, mw;
      cells(p, refscan[i], pr, cx0, cy0, hx, hy, mx, my);
      inm = hx >= 0 && hy >= 0 && hx < MS && hy < MS;
      hw = window(slot, MS, hx, hy); mw = window(slot, MS, mx, my);
      v = beam_score(hw, mw, inm, lut, f);
      if (!inm) n_out++;
      if (inm && (hw != 0) && ((hw & ~mw) == 0)) n_veto++;
    end
  endtask

  task automatic invocation(input int inv, input bit with_scan);
    logic [31:0] res [4*NP];
    logic [31:0] st;
    int got, t_in_end, t_out_first;
    axil_wr(8'h00, with_scan ? 32'h9 : 32'h1);
    if (!with_scan) n_reuse++;
    if (with_scan) for (int i = 0; i < NS; i++) begin send(refscan[i].r); send(refscan[i].th); end
    for (int k = 0; k < NP; k++) begin
      pose_t g;
      g = guess[2 * inv + k];
      cut_map(k, g);
      send(g.x); send(g.y); send(g.th);
      for (int y = 0; y < MS; y++)
        for (int j = 0; j < MS / 32; j++) begin
          logic [31:0] w;
          for (int b = 0; b < 32; b++) w[b] = refmap[k][y][32 * j + b];
          send(w);
        end
    end
    t_in_end = cyc;
    // collect results with back-pressure
    got = 0; t_out_first = -1;
    while (got < 4 * NP) begin
      @(negedge clk);
      m_tready = ($urandom % 4) != 0;
      #1;
      if (m_tvalid && t_out_first < 0) t_out_first = cyc;
      if (m_tvalid && !m_tready) out_stalls++;
      @(posedge clk);
      if (m_tvalid && m_tready) begin
        res[got] = m_tdata;
        checks++;
        if (m_tlast !== (got == 4 * NP - 1)) begin failures++; $display("FAIL tlast"); end
        got++;
      end
    end
    @(negedge clk); m_tready = 0;
    run_lat[inv] = t_out_first - t_in_end;
    repeat (3) @(negedge clk);
    axil_rd(8'h00, st);
    checks++;
    if (st[2:0] !== 3'b110) begin failures++; $display("FAIL CTRL status %h", st); end
    for (int k = 0; k < NP; k++) begin
      pose_t g, ep, gp; fix_t es; int ei, eh;
      g = guess[2 * inv + k];
      greedy(k, W, g, pr, lut, ep, es, ei, eh);
      n_imp += ei; n_half += eh;
      gp.x = fix_t'(res[4 * k]); gp.y = fix_t'(res[4 * k + 1]); gp.th = fix_t'(res[4 * k + 2]);
      checks += 2;
      if (gp !== ep || fix_t'(res[4 * k + 3]) !== es) begin
        failures++;
        $display("FAIL particle %0d: got (%f,%f,%f) %f exp (%f,%f,%f) %f", 2 * inv + k,
                 to_real(gp.x), to_real(gp.y), to_real(gp.th), to_real(fix_t'(res[4 * k + 3])),
                 to_real(ep.x), to_real(ep.y), to_real(ep.th), to_real(es));
      end
      // greedy hill climbing may stop one cell off the optimum: allow two cells
      if (rabs(to_real(gp.x) - tx) > 2 * DELTA || rabs(to_real(gp.y) - ty) > 2 * DELTA ||
          rabs(to_real(gp.th) - tth) > 0.05) begin
        failures++;
        $display("FAIL particle %0d refined to (%f,%f,%f), true (%f,%f,%f)", 2 * inv + k,
                 to_real(gp.x), to_real(gp.y), to_real(gp.th), tx, ty, tth);
      end
      $display("particle %0d: guess (%6.3f,%6.3f,%6.3f) -> (%6.3f,%6.3f,%6.3f) score %0.2f/%0d, %0d moves %0d halvings",
               2 * inv + k, to_real(g.x), to_real(g.y), to_real(g.th), to_real(gp.x), to_real(gp.y),
               to_real(gp.th), to_real(fix_t'(res[4 * k + 3])), NS, ei, eh);
      count_beams(k, g, gp);
    end
  endtask

  initial begin
    int expect_lat;
    pr = '0;
    pr.num_iters = ITERS; pr.num_scans = NS;
    pr.origin_x = to_fix(OX); pr.origin_y = to_fix(OY);
    pr.inv_res = 32'sd1310720; pr.lin_step = 32'sd3277; pr.ang_step = 32'sd3277;
    pr.free_delta = 32'sd4634;
    lut = LUT_DEFAULT;

    // true pose, metres; scan ray-marched in the world map
    tx = OX + 180.3 * DELTA; ty = OY + 120.6 * DELTA; tth = 0.35;
    for (int i = 0; i < NS; i++) begin
      real a, r, x, y;
      a = -1.5708 + 3.14159 * real'(i) / real'(NS);
      r = 0.0;
      forever begin
        r += DELTA / 8.0;
        x = tx + r * $cos(tth + a); y = ty + r * $sin(tth + a);
        if (world(int'($floor((x - OX) / DELTA)), int'($floor((y - OY) / DELTA))) || r > 30.0) break;
      end
      refscan[i].r = to_fix(r); refscan[i].th = to_fix(a);
    end
    guess[0] = '{x: to_fix(tx + 0.08), y: to_fix(ty - 0.06), th: to_fix(tth + 0.03)};
    guess[1] = '{x: to_fix(tx - 0.11), y: to_fix(ty + 0.04), th: to_fix(tth - 0.04)};
    guess[2] = '{x: to_fix(tx + 0.02), y: to_fix(ty + 0.09), th: to_fix(tth + 0.05)};
    guess[3] = '{x: to_fix(tx - 0.05), y: to_fix(ty - 0.10), th: to_fix(tth - 0.02)};

    repeat (5) @(posedge clk);
    rst_n = 1;
    axil_wr(8'h08, NS);
    axil_wr(8'h0C, pr.origin_x);
    axil_wr(8'h10, pr.origin_y);

    invocation(0, 1);
    invocation(1, 0);

    // compute latency: last input word -> first result word, identical in
    // both runs; submodule latency plus the control hand-over (3 cycles)
    expect_lat = (NS + CORDIC_ITER + 13) + ITERS * (6 * (NS + CORDIC_ITER + 11) + 1);
    $display("compute latency %0d and %0d cycles (submodule %0d)", run_lat[0], run_lat[1], expect_lat);
    checks += 2;
    if (run_lat[0] != run_lat[1]) begin failures++; $display("FAIL latency differs"); end
    if (run_lat[0] != expect_lat + 3) begin failures++; $display("FAIL latency"); end

    $display("mechanisms: improve=%0d halve=%0d outside=%0d veto=%0d reuse=%0d in_stall=%0d out_stall=%0d",
             n_imp, n_half, n_out, n_veto, n_reuse, in_stalls, out_stalls);
    checks += 7;
    if (n_imp == 0)      begin failures++; $display("FAIL never improved"); end
    if (n_half == 0)     begin failures++; $display("FAIL never halved"); end
    if (n_out == 0)      begin failures++; $display("FAIL no beam outside the local map"); end
    if (n_veto == 0)     begin failures++; $display("FAIL no missed-cell veto"); end
    if (n_reuse == 0)    begin failures++; $display("FAIL scan never reused"); end
    if (in_stalls == 0)  begin failures++; $display("FAIL no input stall"); end
    if (out_stalls == 0) begin failures++; $display("FAIL no output back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
