// axil_regs: AXI4-Lite slave holding the "additional parameters" of the scan
// matcher core, its score lookup table and its start/done control.
//
// Register map (32-bit registers, byte addresses):
//   0x00 CTRL       write: bit0 start (pulse, ignored while busy),
//                          bit3 load_scan (stored: the next run first reads a
//                          new scan from the stream)
//                   read:  bit0 busy, bit1 done (set at the end of a run,
//                          cleared by start), bit2 idle, bit3 load_scan
//   0x04 NUM_ITERS  hill-climbing iterations           reset 25
//   0x08 NUM_SCANS  measurements in the scan           reset 0
//   0x0C ORIGIN_X   world x of cell (0,0) of the entire map (Q16.16)
//   0x10 ORIGIN_Y   world y of cell (0,0) of the entire map (Q16.16)
//   0x14 INV_RES    1/Delta (Q16.16)                   reset 20.0 (Delta 0.05 m)
//   0x18 LIN_STEP   initial linear step (Q16.16)       reset 0.05 m
//   0x1C ANG_STEP   initial angular step (Q16.16)      reset 0.05 rad
//   0x20 FREE_DELTA delta, missed-point distance       reset 0.0707 m
//   0x24..0x44 LUT0..LUT8  score table u(d'), entry k = (ky+1)*3+(kx+1),
//                   reset exp(-(kx^2+ky^2)/2) (sigma = Delta)
// Unmapped addresses read 0 and ignore writes; responses are always OKAY.
//
// Handshake: a write address and its data may arrive in either order or
// together; the write happens when both are held, and one response follows.
// One read is served at a time, data one cycle after the address.
//
// Following the source: parameters (iteration count, map placement) come
// over AXI4-Lite, the iteration count defaults to 25, Delta 0.05 m and the
// Gaussian score table. This design's choices: the register map, the reset
// values of the steps, delta and sigma, and programmable table entries.
//
// Lint: the handshake assertions use "disable iff (!rst_n)", so the tools
// see rst_n both as the asynchronous flop reset and as a sampled signal
// (SYNCASYNCNET); that is intended. BRESP/RRESP are constant OKAY because
// every access succeeds.
module axil_regs
  import smc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // to / from the core
  output params_t     params,
  output lut_t        lut,
  output logic        load_scan,
  output logic        start,
  input  logic        core_busy,
  input  logic        core_done
);

  localparam logic [7:0] A_CTRL = 8'h00, A_ITERS = 8'h04, A_SCANS = 8'h08,
                         A_OX = 8'h0C, A_OY = 8'h10, A_INVRES = 8'h14,
                         A_LSTEP = 8'h18, A_ASTEP = 8'h1C, A_FREE = 8'h20,
                         A_LUT0 = 8'h24;

  logic [7:0]  aw_q;
  logic        aw_held, w_held;
  logic [31:0] w_q;
  logic [3:0]  ws_q;
  logic        done_q;

  assign s_awready = !aw_held && !s_bvalid;
  assign s_wready  = !w_held  && !s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  function automatic logic [31:0] merge(input logic [31:0] old,
                                        input logic [31:0] nw,
                                        input logic [3:0] be);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = be[b] ? nw[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  function automatic logic [31:0] reg_value(input logic [7:0] a);
    logic [31:0] v;
    v = '0;
    case (a)
      A_CTRL:   v = {28'd0, load_scan, !core_busy, done_q, core_busy};
      A_ITERS:  v = {16'd0, params.num_iters};
      A_SCANS:  v = {16'd0, params.num_scans};
      A_OX:     v = params.origin_x;
      A_OY:     v = params.origin_y;
      A_INVRES: v = params.inv_res;
      A_LSTEP:  v = params.lin_step;
      A_ASTEP:  v = params.ang_step;
      A_FREE:   v = params.free_delta;
      default:
        for (int k = 0; k < WIN; k++)
          if (a == A_LUT0 + 8'(4 * k)) v = lut[k];
    endcase
    return v;
  endfunction

  logic        do_write;
  logic [7:0]  wa;
  logic [31:0] wd;
  logic [3:0]  wb;
  always_comb begin
    wa = aw_held ? aw_q : s_awaddr;
    wd = w_held  ? w_q  : s_wdata;
    wb = w_held  ? ws_q : s_wstrb;
    do_write = (aw_held || (s_awvalid && s_awready)) &&
               (w_held  || (s_wvalid  && s_wready)) && !s_bvalid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_held   <= 1'b0;
      w_held    <= 1'b0;
      aw_q      <= '0;
      w_q       <= '0;
      ws_q      <= '0;
      s_bvalid  <= 1'b0;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
      start     <= 1'b0;
      load_scan <= 1'b0;
      done_q    <= 1'b0;
      params.num_iters  <= 16'd25;
      params.num_scans  <= 16'd0;
      params.origin_x   <= '0;
      params.origin_y   <= '0;
      params.inv_res    <= 32'sd1310720;
      params.lin_step   <= 32'sd3277;
      params.ang_step   <= 32'sd3277;
      params.free_delta <= 32'sd4634;
      lut               <= LUT_DEFAULT;
    end else begin
      start <= 1'b0;
      if (core_done) done_q <= 1'b1;

      // write channel
      if (do_write) begin
        aw_held  <= 1'b0;
        w_held   <= 1'b0;
        s_bvalid <= 1'b1;
        case (wa)
          A_CTRL: begin
            if (wb[0]) begin
              load_scan <= wd[3];
              if (wd[0] && !core_busy) begin
                start  <= 1'b1;
                done_q <= 1'b0;
              end
            end
          end
          A_ITERS:  params.num_iters  <= 16'(merge({16'd0, params.num_iters}, wd, wb));
          A_SCANS:  params.num_scans  <= 16'(merge({16'd0, params.num_scans}, wd, wb));
          A_OX:     params.origin_x   <= merge(params.origin_x,   wd, wb);
          A_OY:     params.origin_y   <= merge(params.origin_y,   wd, wb);
          A_INVRES: params.inv_res    <= merge(params.inv_res,    wd, wb);
          A_LSTEP:  params.lin_step   <= merge(params.lin_step,   wd, wb);
          A_ASTEP:  params.ang_step   <= merge(params.ang_step,   wd, wb);
          A_FREE:   params.free_delta <= merge(params.free_delta, wd, wb);
          default:
            for (int k = 0; k < WIN; k++)
              if (wa == A_LUT0 + 8'(4 * k)) lut[k] <= merge(lut[k], wd, wb);
        endcase
      end else begin
        if (s_awvalid && s_awready) begin
          aw_held <= 1'b1;
          aw_q    <= s_awaddr;
        end
        if (s_wvalid && s_wready) begin
          w_held <= 1'b1;
          w_q    <= s_wdata;
          ws_q   <= s_wstrb;
        end
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;

      // read channel
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= reg_value(s_araddr);
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI4-Lite rules: a response is held until accepted
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
