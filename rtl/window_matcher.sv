// window_matcher: per-measurement score of the greedy endpoint matching.
//
// For each of the nine cells of the 3x3 searching window (offset kx, ky in
// -1..1), the candidate matches when the hit-window cell is occupied and the
// corresponding missed-window cell (same offset from the missed cell) is
// free. Among the matching candidates the one with the smallest offset
// distance sqrt(kx^2+ky^2)*Delta is chosen, and its score u(d') =
// exp(-d'^2 / 2 sigma^2) is read from the nine-entry lookup table (held in
// registers outside, so that sigma and Delta stay programmable). With no
// match, or when the hit cell lies outside the local map, the score is 0.
// Ties at equal distance go to the lowest window index; with a symmetric
// table they give the same value.
//
// Interface: in_valid with hit_win, miss_win, hit_in_map and the table;
// out_valid, score and matched one cycle later. Window bit k =
// (ky+1)*3 + (kx+1), table entry k belongs to the same offset.
//
// Following the source: the occupied/free test on binarized cells, the
// minimum-distance choice and the distance-indexed lookup table. The
// register stage and the tie rule are this design's choices.
module window_matcher
  import smc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  win_t hit_win,
  input  win_t miss_win,
  input  logic hit_in_map,
  input  lut_t lut,
  output logic out_valid,
  output fix_t score,
  output logic matched
);

  // squared offset distance, in cells^2, of window index k
  function automatic int unsigned dist2(input int unsigned k);
    int kx, ky;
    kx = int'(k % 3) - 1;
    ky = int'(k / 3) - 1;
    return unsigned'(kx * kx + ky * ky);
  endfunction

  win_t cand;
  fix_t best;
  logic found;

  always_comb begin
    cand  = hit_win & ~miss_win;
    best  = '0;
    found = 1'b0;
    if (hit_in_map) begin
      for (int unsigned d = 0; d <= 2; d++) begin
        for (int unsigned k = 0; k < WIN; k++) begin
          if (!found && cand[k] && dist2(k) == d) begin
            found = 1'b1;
            best  = lut[k];
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    score   <= best;
    matched <= found;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
