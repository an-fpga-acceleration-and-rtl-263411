// scan_score_unit: matching score s(x, m, z) of one candidate pose.
//
// s = sum over all measurements i of u(d_i), where u(d_i) is the lookup-table
// score of the closest matching cell in the 3x3 window around the beam
// endpoint (0 when nothing matches or the endpoint is outside the local map).
//
// How it works: after start the unit latches the pose and the shared
// parameters, then reads one measurement per cycle from the scan buffer and
// pushes it through scan_point_unit, a two-port read of the tripled local
// map (hit window at C^H, missed window at C^M) and window_matcher, and adds
// the result to an accumulator. It finishes when all num_scans results are
// in, so done is high num_scans + CORDIC_ITER + 8 cycles after the start cycle,
// independent of the map contents.
//
// Interface: start (one cycle) with pose, parameters, local map cell offset
// cx0/cy0 and the score table; done (one cycle) with score, n_matched
// (measurements that found a match) and n_outside (endpoints outside the
// local map). The scan buffer and map read ports are driven from here; both
// memories answer one cycle after the request.
//
// Following the source: the score sum, the per-measurement procedure and the
// Q16.16 format. This design's choices: fully pipelined, one measurement per
// cycle, and the measurement order 0..num_scans-1.
module scan_score_unit
  import smc_pkg::*;
#(
  parameter int unsigned MAP_SIZE  = 256,
  parameter int unsigned MAX_SCANS = 512
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  pose_t                        pose,
  input  fix_t                         origin_x,
  input  fix_t                         origin_y,
  input  fix_t                         inv_res,
  input  fix_t                         free_delta,
  input  logic [15:0]                  num_scans,
  input  logic signed [31:0]           cx0,
  input  logic signed [31:0]           cy0,
  input  lut_t                         lut,
  // scan buffer read port
  output logic                         scan_rd_en,
  output logic [$clog2(MAX_SCANS)-1:0] scan_rd_addr,
  input  scan_t                        scan_rd_data,
  // local map read ports (a: hit window, b: missed window)
  output logic                         map_rd_en,
  output logic signed [31:0]           hit_cx,
  output logic signed [31:0]           hit_cy,
  output logic signed [31:0]           miss_cx,
  output logic signed [31:0]           miss_cy,
  input  win_t                         hit_win,
  input  win_t                         miss_win,
  // result
  output logic                         busy,
  output logic                         done,
  output fix_t                         score,
  output logic [15:0]                  n_matched,
  output logic [15:0]                  n_outside
);

  // Matcher outputs, accumulated below
  logic m_valid, m_matched, inmap_d;
  fix_t m_score;

  // Latched evaluation context
  fix_t               base_x, base_y, th_q, inv_res_q, free_delta_q;
  logic signed [31:0] cx0_q, cy0_q;
  lut_t               lut_q;
  logic [15:0]        n_q;

  logic [15:0] issued, received;
  logic        issuing;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      issuing  <= 1'b0;
      issued   <= '0;
      received <= '0;
      done     <= 1'b0;
      score    <= '0;
      n_matched <= '0;
      n_outside <= '0;
      n_q      <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        issuing   <= (num_scans != 0);
        issued    <= '0;
        received  <= '0;
        score     <= '0;
        n_matched <= '0;
        n_outside <= '0;
        n_q       <= (num_scans > 16'(MAX_SCANS)) ? 16'(MAX_SCANS) : num_scans;
      end else if (busy) begin
        if (issuing) begin
          issued <= issued + 1'b1;
          if (issued + 1'b1 == n_q) issuing <= 1'b0;
        end
        if (m_valid) begin
          received  <= received + 1'b1;
          score     <= score + m_score;
          n_matched <= n_matched + 16'(m_matched);
          n_outside <= n_outside + 16'(!inmap_d);
        end
        if (received == n_q && !issuing) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start && !busy) begin
      base_x       <= pose.x - origin_x;
      base_y       <= pose.y - origin_y;
      th_q         <= pose.th;
      inv_res_q    <= inv_res;
      free_delta_q <= free_delta;
      cx0_q        <= cx0;
      cy0_q        <= cy0;
      lut_q        <= lut;
    end
  end

  assign scan_rd_en   = issuing;
  assign scan_rd_addr = $clog2(MAX_SCANS)'(issued);

  // Scan buffer answers one cycle later
  logic sp_in_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sp_in_valid <= 1'b0;
    else        sp_in_valid <= issuing;
  end

  logic               sp_valid, sp_inmap;
  logic signed [31:0] sp_hx, sp_hy, sp_mx, sp_my;

  scan_point_unit #(.MAP_SIZE(MAP_SIZE)) u_sp (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (sp_in_valid),
    .scan      (scan_rd_data),
    .pose_th   (th_q),
    .base_x    (base_x),
    .base_y    (base_y),
    .free_delta(free_delta_q),
    .inv_res   (inv_res_q),
    .cx0       (cx0_q),
    .cy0       (cy0_q),
    .out_valid (sp_valid),
    .hit_x     (sp_hx),
    .hit_y     (sp_hy),
    .miss_x    (sp_mx),
    .miss_y    (sp_my),
    .hit_in_map(sp_inmap)
  );

  assign map_rd_en = sp_valid;
  assign hit_cx    = sp_hx;
  assign hit_cy    = sp_hy;
  assign miss_cx   = sp_mx;
  assign miss_cy   = sp_my;

  // Map answers one cycle later
  logic win_valid, inmap_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) win_valid <= 1'b0;
    else        win_valid <= sp_valid;
  end
  always_ff @(posedge clk) inmap_q <= sp_inmap;

  window_matcher u_wm (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (win_valid),
    .hit_win   (hit_win),
    .miss_win  (miss_win),
    .hit_in_map(inmap_q),
    .lut       (lut_q),
    .out_valid (m_valid),
    .score     (m_score),
    .matched   (m_matched)
  );

  always_ff @(posedge clk) inmap_d <= inmap_q;

endmodule
