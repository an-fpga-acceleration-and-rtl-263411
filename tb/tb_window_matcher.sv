// tb_window_matcher: checks the per-measurement window test and score
// lookup against the reference model, with a table whose nine entries all
// differ so a wrong index shows. Directed cases cover the centre match, a
// corner-only match, a match vetoed by an occupied missed cell and an
// endpoint outside the map; random windows cover the rest.
//
// The hit/missed test and the minimum-distance table score follow the
// published method; the tie rule is this design's own.
module tb_window_matcher;
  import smc_pkg::*;
  import smc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid;
  win_t hw, mw;
  logic inmap;
  lut_t lut;
  logic out_valid, matched;
  fix_t score;
  int checks = 0, failures = 0;

  window_matcher dut (.clk, .rst_n, .in_valid, .hit_win(hw), .miss_win(mw),
                      .hit_in_map(inmap), .lut, .out_valid, .score, .matched);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input win_t h, input win_t m, input bit im);
    fix_t exp_s;
    bit   exp_f;
    @(negedge clk);
    hw = h; mw = m; inmap = im; in_valid = 1;
    exp_s = beam_score(h, m, im, lut, exp_f);
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || score !== exp_s || matched !== exp_f) begin
      failures++;
      $display("FAIL h=%b m=%b in=%0d: got %0d/%0d exp %0d/%0d", h, m, im, score, matched, exp_s, exp_f);
    end
  endtask

  initial begin
    in_valid = 0; hw = 0; mw = 0; inmap = 0;
    for (int k = 0; k < 9; k++) lut[k] = fix_t'(1000 * (k + 1));
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed
    apply(9'b000010000, 9'b0, 1);                  // centre
    if (score !== lut[4]) begin failures++; $display("FAIL centre"); end
    checks++;
    apply(9'b100000001, 9'b0, 1);                  // two corners: lowest index wins
    if (score !== lut[0]) begin failures++; $display("FAIL corner"); end
    checks++;
    apply(9'b100100000, 9'b0, 1);                  // edge (k=5? no: k=5 is bit5) d2=1 beats corner k=8
    apply(9'b000010000, 9'b000010000, 1);          // vetoed by missed cell
    if (score !== 0 || matched) begin failures++; $display("FAIL veto"); end
    checks++;
    apply(9'b111111111, 9'b0, 0);                  // outside map
    if (score !== 0) begin failures++; $display("FAIL outside"); end
    checks++;
    // random
    for (int i = 0; i < 2000; i++) apply(win_t'($urandom), win_t'($urandom) & win_t'($urandom), ($urandom % 8) != 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
