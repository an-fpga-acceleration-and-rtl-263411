// tb_scan_point_unit: streams batches of random measurements (one per cycle)
// for random poses through the coordinate transform and checks
//  - every hit/missed cell against the bit-exact reference model,
//  - the hit cell against real-valued trigonometry wherever the endpoint is
//    not within 1% of a cell border,
//  - the in-map flag, and
//  - the latency of CORDIC_ITER + 4 cycles and one result per cycle.
//
// The transform equations follow the published method; the CORDIC latency is
// this design's own.
module tb_scan_point_unit;
  import smc_pkg::*;
  import smc_ref_pkg::*;

  localparam int MS = 256;
  localparam int LAT = CORDIC_ITER + 4;
  localparam int NB = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid;
  scan_t scan;
  fix_t pose_th, base_x, base_y, free_delta, inv_res;
  logic signed [31:0] cx0, cy0;
  logic out_valid, hit_in_map;
  logic signed [31:0] hit_x, hit_y, miss_x, miss_y;
  int checks = 0, failures = 0;

  scan_point_unit #(.MAP_SIZE(MS)) dut (.clk, .rst_n, .in_valid, .scan, .pose_th,
    .base_x, .base_y, .free_delta, .inv_res, .cx0, .cy0, .out_valid,
    .hit_x, .hit_y, .miss_x, .miss_y, .hit_in_map);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  scan_t batch [NB];
  int cyc = 0, t_first_in, t_first_out;
  always @(posedge clk) cyc++;

  initial begin
    params_t pr;
    pose_t   p;
    int real_checked = 0;
    in_valid = 0; scan = 0;
    pr = '0;
    pr.inv_res = 32'sd1310720;      // 1 / 0.05 m
    pr.free_delta = 32'sd4634;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 30; b++) begin
      int cx, cy, got;
      real rx;
      p.x  = to_fix(urand(2000) / 100.0 - 10.0);
      p.y  = to_fix(urand(2000) / 100.0 - 10.0);
      p.th = to_fix((urand(6283) - 3141) / 1000.0);
      pr.origin_x = to_fix(-12.8); pr.origin_y = to_fix(-12.8);
      corner(p, pr, MS / 2, cx, cy);
      @(negedge clk);
      pose_th = p.th; base_x = p.x - pr.origin_x; base_y = p.y - pr.origin_y;
      free_delta = pr.free_delta; inv_res = pr.inv_res; cx0 = cx; cy0 = cy;
      for (int i = 0; i < NB; i++) begin
        batch[i].r  = to_fix(urand(1500) / 100.0 + 0.1);
        batch[i].th = to_fix((urand(6283) - 3141) / 1000.0);
      end
      fork
        begin
          for (int i = 0; i < NB; i++) begin
            in_valid = 1; scan = batch[i];
            if (i == 0) t_first_in = cyc;
            @(negedge clk);
          end
          in_valid = 0;
        end
        begin
          got = 0;
          while (got < NB) begin
            @(posedge clk); #1;
            if (out_valid) begin
              int hx, hy, mx, my;
              bit inm;
              if (got == 0) begin
                t_first_out = cyc;
                checks++;
                if (t_first_out - t_first_in != LAT) begin
                  failures++; $display("FAIL latency %0d", t_first_out - t_first_in);
                end
              end
              cells(p, batch[got], pr, cx, cy, hx, hy, mx, my);
              inm = hx >= 0 && hy >= 0 && hx < MS && hy < MS;
              checks++;
              if (hit_x !== hx || hit_y !== hy || miss_x !== mx || miss_y !== my || hit_in_map !== inm) begin
                failures++;
                $display("FAIL b%0d i%0d got (%0d,%0d)(%0d,%0d)%0d exp (%0d,%0d)(%0d,%0d)%0d", b, got,
                         hit_x, hit_y, miss_x, miss_y, hit_in_map, hx, hy, mx, my, inm);
              end
              // independent real-valued check of the hit cell x
              rx = (to_real(p.x) - to_real(pr.origin_x) + to_real(batch[got].r) *
                    $cos(to_real(p.th) + to_real(batch[got].th))) / 0.05;
              if ((rx - $floor(rx)) > 0.01 && (rx - $floor(rx)) < 0.99) begin
                checks++; real_checked++;
                if (hit_x !== int'($floor(rx)) - cx) begin
                  failures++; $display("FAIL real x %f vs %0d", rx, hit_x + cx);
                end
              end
              got++;
            end else if (got > 0) begin
              failures++; $display("FAIL gap in output stream");
              got = NB;
            end
          end
        end
      join
    end
    $display("real-valued checks: %0d", real_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
