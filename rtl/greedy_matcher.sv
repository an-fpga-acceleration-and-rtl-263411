// greedy_matcher: one scan matcher submodule. Refines one particle's pose by
// greedy endpoint matching (hill climbing) against its local map.
//
// How it works: the initial pose x' is scored first. Each iteration then
// scores the six poses one step away along each axis (x+, x-, y-, y+, th+,
// th-, linear step for x/y, angular step for th), one after another on the
// shared scan_score_unit. If the best of them beats the current score
// strictly, the pose moves there; otherwise no direction helps and both
// steps are halved. The number of iterations is a register value (the
// source fixes it, e.g. 25), so the latency depends only on num_iters and
// num_scans, never on the data:
//   cycles = (n + CORDIC_ITER + 13) + num_iters * (6 * (n + CORDIC_ITER + 11) + 1)
// counted from the start cycle to the done cycle, both included, with
// n = num_scans > 0. With the defaults (25 iterations, CORDIC_ITER = 20) and
// a 180-beam scan that is 31,888 cycles, 0.32 ms at 100 MHz.
//
// The local map's corner cell (cx0, cy0) is derived at start from the
// initial pose: the host cuts the 2W x 2W local map centred on the cell of
// x', so cx0 = floor((x'.x - origin_x) / Delta) - W, likewise for y.
//
// Interface: start (one cycle) with init_pose, params and the score table,
// which stay stable until done. done (one cycle) with pose_out/score_out,
// held until the next start. n_improve / n_halve count the iterations that
// moved the pose and those that halved the steps, for observation.
//
// Following the source: hill climbing along axial directions, halving of the
// step when nothing improves, fixed iteration count, Q16.16 arithmetic,
// local map centred on the pose cell. This design's choices: the six
// directions and their order, strict improvement, tie to the earlier
// direction, evaluating directions one at a time, and deriving cx0/cy0 from
// the initial pose.
//
// Lint: the score unit's busy flag and its n_matched / n_outside statistics
// are not needed for the search and stay unconnected here.
module greedy_matcher
  import smc_pkg::*;
#(
  parameter int unsigned W         = 128,
  parameter int unsigned MAX_SCANS = 512
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  pose_t                        init_pose,
  input  params_t                      params,
  input  lut_t                         lut,
  // scan buffer read port
  output logic                         scan_rd_en,
  output logic [$clog2(MAX_SCANS)-1:0] scan_rd_addr,
  input  scan_t                        scan_rd_data,
  // local map read ports
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
  output pose_t                        pose_out,
  output fix_t                         score_out,
  output logic [15:0]                  n_improve,
  output logic [15:0]                  n_halve
);

  localparam int unsigned MAP_SIZE = 2 * W;

  typedef enum logic [2:0] {
    S_IDLE, S_EVAL0, S_WAIT0, S_DIR, S_WAITD, S_DECIDE, S_DONE
  } state_t;

  state_t             state;
  pose_t              cur_pose, best_pose, eval_pose;
  fix_t               cur_score, best_score;
  fix_t               lstep, astep;
  logic [2:0]         dir;
  logic [15:0]        iter;
  logic signed [31:0] cx0, cy0;

  logic ev_start, ev_busy, ev_done;
  fix_t ev_score;
  logic [15:0] ev_matched, ev_outside;

  // Local map corner cell from the initial pose
  function automatic logic signed [31:0] corner(input fix_t p, input fix_t o,
                                                input fix_t s);
    logic signed [63:0] prod;
    prod = 64'(p - o) * 64'(s);
    return 32'(prod >>> 32) - 32'(W);
  endfunction

  // Neighbour pose along direction d
  function automatic pose_t neighbour(input pose_t p, input logic [2:0] d,
                                      input fix_t ls, input fix_t as);
    pose_t n;
    n = p;
    case (d)
      3'd0:    n.x  = p.x  + ls;
      3'd1:    n.x  = p.x  - ls;
      3'd2:    n.y  = p.y  - ls;
      3'd3:    n.y  = p.y  + ls;
      3'd4:    n.th = p.th + as;
      default: n.th = p.th - as;
    endcase
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      busy      <= 1'b0;
      done      <= 1'b0;
      ev_start  <= 1'b0;
      n_improve <= '0;
      n_halve   <= '0;
      iter      <= '0;
      dir       <= '0;
      cur_pose  <= '0;
      best_pose <= '0;
      eval_pose <= '0;
      cur_score <= '0;
      best_score <= '0;
      lstep     <= '0;
      astep     <= '0;
      cx0       <= '0;
      cy0       <= '0;
      pose_out  <= '0;
      score_out <= '0;
    end else begin
      done     <= 1'b0;
      ev_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          busy      <= 1'b1;
          cur_pose  <= init_pose;
          eval_pose <= init_pose;
          lstep     <= params.lin_step;
          astep     <= params.ang_step;
          cx0       <= corner(init_pose.x, params.origin_x, params.inv_res);
          cy0       <= corner(init_pose.y, params.origin_y, params.inv_res);
          iter      <= '0;
          n_improve <= '0;
          n_halve   <= '0;
          state     <= S_EVAL0;
        end
        S_EVAL0: begin
          ev_start <= 1'b1;
          state    <= S_WAIT0;
        end
        S_WAIT0: if (ev_done) begin
          cur_score  <= ev_score;
          best_score <= ev_score;
          best_pose  <= cur_pose;
          dir        <= '0;
          state      <= (params.num_iters == 0) ? S_DONE : S_DIR;
        end
        S_DIR: begin
          eval_pose <= neighbour(cur_pose, dir, lstep, astep);
          ev_start  <= 1'b1;
          state     <= S_WAITD;
        end
        S_WAITD: if (ev_done) begin
          if (ev_score > best_score) begin
            best_score <= ev_score;
            best_pose  <= eval_pose;
          end
          if (dir == 3'd5) state <= S_DECIDE;
          else begin
            dir   <= dir + 1'b1;
            state <= S_DIR;
          end
        end
        S_DECIDE: begin
          if (best_score > cur_score) begin
            cur_pose  <= best_pose;
            cur_score <= best_score;
            n_improve <= n_improve + 1'b1;
          end else begin
            lstep   <= lstep >>> 1;
            astep   <= astep >>> 1;
            n_halve <= n_halve + 1'b1;
          end
          dir  <= '0;
          iter <= iter + 1'b1;
          state <= (iter + 1'b1 == params.num_iters) ? S_DONE : S_DIR;
        end
        S_DONE: begin
          pose_out  <= cur_pose;
          score_out <= cur_score;
          done      <= 1'b1;
          busy      <= 1'b0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  scan_score_unit #(.MAP_SIZE(MAP_SIZE), .MAX_SCANS(MAX_SCANS)) u_score (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (ev_start),
    .pose        (eval_pose),
    .origin_x    (params.origin_x),
    .origin_y    (params.origin_y),
    .inv_res     (params.inv_res),
    .free_delta  (params.free_delta),
    .num_scans   (params.num_scans),
    .cx0         (cx0),
    .cy0         (cy0),
    .lut         (lut),
    .scan_rd_en  (scan_rd_en),
    .scan_rd_addr(scan_rd_addr),
    .scan_rd_data(scan_rd_data),
    .map_rd_en   (map_rd_en),
    .hit_cx      (hit_cx),
    .hit_cy      (hit_cy),
    .miss_cx     (miss_cx),
    .miss_cy     (miss_cy),
    .hit_win     (hit_win),
    .miss_win    (miss_win),
    .busy        (ev_busy),
    .done        (ev_done),
    .score       (ev_score),
    .n_matched   (ev_matched),
    .n_outside   (ev_outside)
  );

endmodule
