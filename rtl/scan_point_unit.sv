// scan_point_unit: coordinate transform of one LiDAR measurement into the
// hit cell C^H and the missed cell C^M of a particle's local map.
//
// For pose [x, y, th] and measurement [r, t] it computes
//   p     = [x + r cos(th+t),         y + r sin(th+t)]          (beam endpoint)
//   p_hat = [x + (r-delta) cos(th+t), y + (r-delta) sin(th+t)]  (point delta
//                                                                 short of it)
// and converts both to cell indices with gamma(p) = floor((p - o) / Delta).
// The division by the map resolution Delta is a multiplication by the
// register value inv_res = 1/Delta. The indices are returned relative to the
// local map, i.e. minus the cell offset (cx0, cy0) of the local map's
// corner cell inside the entire map, so that 0..MAP_SIZE-1 is inside.
//
// Pipeline: cordic_sincos (CORDIC_ITER+2 stages), one stage for the four
// products and the additions, one stage for the scaling to cell units.
// LATENCY = CORDIC_ITER + 4, one measurement per cycle. pose, base_x/base_y
// (pose minus map origin), free_delta, inv_res and cx0/cy0 are sampled at
// the input for the angle and at the later stages for the rest, so the
// caller keeps them constant while measurements are in flight (the score
// unit holds them for a whole pose evaluation).
//
// Following the source: the transform equations, delta, gamma and the
// Q16.16 format. This design's choices: the CORDIC, the split into stages,
// flooring of all products and the in_map flag for the hit cell (points
// outside the local map are left out of the score, as the source states).
module scan_point_unit
  import smc_pkg::*;
#(
  parameter int unsigned MAP_SIZE = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  scan_t              scan,
  input  fix_t               pose_th,
  input  fix_t               base_x,     // pose.x - origin_x
  input  fix_t               base_y,     // pose.y - origin_y
  input  fix_t               free_delta,
  input  fix_t               inv_res,
  input  logic signed [31:0] cx0,
  input  logic signed [31:0] cy0,
  output logic               out_valid,
  output logic signed [31:0] hit_x,
  output logic signed [31:0] hit_y,
  output logic signed [31:0] miss_x,
  output logic signed [31:0] miss_y,
  output logic               hit_in_map
);


  logic  c_valid;
  fix_t  c_cos, c_sin;
  logic [63:0] c_tag;

  cordic_sincos #(.TAG_W(64)) u_cordic (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .angle    (pose_th + scan.th),
    .in_tag   ({scan.r, scan.r - free_delta}),
    .out_valid(c_valid),
    .cos_o    (c_cos),
    .sin_o    (c_sin),
    .out_tag  (c_tag)
  );

  fix_t r_hit, r_miss;
  assign r_hit  = fix_t'(c_tag[63:32]);
  assign r_miss = fix_t'(c_tag[31:0]);

  // Stage A: endpoint and missed point relative to the map origin (metres)
  fix_t px, py, qx, qy;
  logic a_valid;
  always_ff @(posedge clk) begin
    px <= base_x + fix_mul(r_hit,  c_cos);
    py <= base_y + fix_mul(r_hit,  c_sin);
    qx <= base_x + fix_mul(r_miss, c_cos);
    qy <= base_y + fix_mul(r_miss, c_sin);
  end

  // Stage B: gamma(): floor(p * inv_res) in cells, relative to the local map
  function automatic logic signed [31:0] to_cell(input fix_t p, input fix_t s,
                                                 input logic signed [31:0] off);
    logic signed [63:0] prod;
    prod = 64'(p) * 64'(s);          // Q32.32
    return 32'(prod >>> 32) - off;   // floor
  endfunction

  logic signed [31:0] hx_c, hy_c;
  assign hx_c = to_cell(px, inv_res, cx0);
  assign hy_c = to_cell(py, inv_res, cy0);

  always_ff @(posedge clk) begin
    hit_x      <= hx_c;
    hit_y      <= hy_c;
    miss_x     <= to_cell(qx, inv_res, cx0);
    miss_y     <= to_cell(qy, inv_res, cy0);
    hit_in_map <= (hx_c >= 0) && (hx_c < MAP_SIZE) && (hy_c >= 0) && (hy_c < MAP_SIZE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid   <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      a_valid   <= c_valid;
      out_valid <= a_valid;
    end
  end

endmodule
