// cordic_sincos: pipelined CORDIC that returns cos(a) and sin(a) of a Q16.16
// angle, used by the coordinate transform of the scan matcher.
//
// How it works: the input angle (radians, any value in [-2*pi, 2*pi)) is
// first wrapped once into [-pi, pi) and then folded into [-pi/2, pi/2] by
// subtracting or adding pi and remembering to negate the result. The folded
// angle drives CORDIC_ITER rotation-mode stages in Q2.30, starting from the
// vector (1/K, 0) so that no gain correction is needed at the end. The
// results are truncated back to Q16.16.
//
// Interface: in_valid/angle/in_tag enter every cycle if wanted (initiation
// interval 1); out_valid/cos_o/sin_o/out_tag appear LATENCY = CORDIC_ITER+2
// cycles later. in_tag is carried along unchanged so a caller can keep data
// that belongs to the same sample aligned with the result.
//
// The source gives no method for the trigonometric functions of its
// coordinate transform; the CORDIC and its 20 stages are this design's
// choice (error below 2^-16 after truncation to Q16.16).
module cordic_sincos
  import smc_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fix_t             angle,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fix_t             cos_o,
  output fix_t             sin_o,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned N = CORDIC_ITER;

  logic signed [31:0] xs [N+1];
  logic signed [31:0] ys [N+1];
  logic signed [31:0] zs [N+1];
  logic               neg [N+1];
  logic               vld [N+1];
  logic [TAG_W-1:0]   tag [N+1];

  // Range reduction: wrap to [-pi, pi), then fold to [-pi/2, pi/2]
  fix_t a_wrap, a_fold;
  logic a_neg;
  always_comb begin
    a_wrap = angle;
    if (angle >= FIX_PI)       a_wrap = angle - FIX_TWO_PI;
    else if (angle < -FIX_PI)  a_wrap = angle + FIX_TWO_PI;
    a_fold = a_wrap;
    a_neg  = 1'b0;
    if (a_wrap > FIX_HALF_PI) begin
      a_fold = a_wrap - FIX_PI;
      a_neg  = 1'b1;
    end else if (a_wrap < -FIX_HALF_PI) begin
      a_fold = a_wrap + FIX_PI;
      a_neg  = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    xs[0]  <= CORDIC_INV_K;
    ys[0]  <= '0;
    zs[0]  <= a_fold <<< 14;   // Q16.16 -> Q2.30
    neg[0] <= a_neg;
    tag[0] <= in_tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld[0] <= 1'b0;
    else        vld[0] <= in_valid;
  end

  for (genvar i = 0; i < N; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (zs[i] >= 0) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - cordic_atan(i);
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + cordic_atan(i);
      end
      neg[i+1] <= neg[i];
      tag[i+1] <= tag[i];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[i+1] <= 1'b0;
      else        vld[i+1] <= vld[i];
    end
  end

  always_ff @(posedge clk) begin
    cos_o   <= neg[N] ? -(xs[N] >>> 14) : (xs[N] >>> 14);
    sin_o   <= neg[N] ? -(ys[N] >>> 14) : (ys[N] >>> 14);
    out_tag <= tag[N];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vld[N];
  end

endmodule
