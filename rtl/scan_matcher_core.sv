// scan_matcher_core: scan matching accelerator for grid-based RBPF SLAM
// (GMapping). It refines the poses of N_PAR particles at once.
//
// For each particle the host sends an initial pose guess and a binarized
// 2W x 2W local map cut around it; the scan is sent once per scan-matching
// phase and shared by all particles. Each of the N_PAR submodules
// (greedy_matcher) then runs a fixed number of hill-climbing iterations of
// greedy endpoint matching against its own local map and its own copy of
// the scan, and the core returns every refined pose with its final score.
// The host invokes the core M/N_PAR times for M particles.
//
// Block structure:
//   axil_regs        AXI4-Lite parameters, score table, start/done
//   stream_loader    AXI4-Stream in -> scan_buffer / pose registers /
//                    local_map_bram of every submodule
//   greedy_matcher   N_PAR submodules (each with scan_score_unit,
//                    scan_point_unit, window_matcher)
//   result_streamer  refined poses and scores -> AXI4-Stream out
//
// Operation: the host programs the registers, sets CTRL.start (with
// CTRL.load_scan when a new scan follows) and sends the input packet. The
// core loads it, runs all submodules together (they finish in the same
// cycle because the latency is data independent), streams 4*N_PAR result
// words with TLAST on the last, and sets CTRL.done.
//
// Following the source: N_PAR = 2 submodules, W = 128 (256 x 256 cell local
// maps of 1-bit cells in a tripled layout), Q16.16 arithmetic, AXI4-Lite for
// parameters and AXI4-Stream for data, fixed iteration count. This design's
// choices: MAX_SCANS = 512, the register map and the stream layout.
//
// Lint notes: the AXI4-Lite responses are constant OKAY (four output bits
// never change). The loader's and submodules' busy flags and the per-
// submodule counters n_improve / n_halve are left for observation in
// simulation and debugging; CTRL reports the controller's own state. TLAST
// of the input stream is not needed (fixed layout). rst_n also appears in the
// assertions' "disable iff" (SYNCASYNCNET), as intended.
module scan_matcher_core
  import smc_pkg::*;
#(
  parameter int unsigned N_PAR     = 2,
  parameter int unsigned W         = 128,
  parameter int unsigned MAX_SCANS = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave: additional parameters
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4-Stream slave: scan, initial poses, local maps
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  // AXI4-Stream master: refined poses and scores
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast
);

  localparam int unsigned MAP_SIZE = 2 * W;
  localparam int unsigned SA = $clog2(MAX_SCANS);
  localparam int unsigned RA = $clog2(MAP_SIZE);

  // ---------------------------------------------------------------- control
  params_t params;
  lut_t    lut;
  logic    load_scan, start, core_done;

  typedef enum logic [1:0] {C_IDLE, C_LOAD, C_RUN, C_OUT} cstate_t;
  cstate_t cst;

  logic ld_start, ld_done, ld_busy;
  logic run_start;
  logic out_start, out_done;
  logic [N_PAR-1:0] gm_done, gm_busy, fin;

  axil_regs u_regs (
    .clk       (clk),
    .rst_n     (rst_n),
    .s_awaddr  (s_axil_awaddr),
    .s_awvalid (s_axil_awvalid),
    .s_awready (s_axil_awready),
    .s_wdata   (s_axil_wdata),
    .s_wstrb   (s_axil_wstrb),
    .s_wvalid  (s_axil_wvalid),
    .s_wready  (s_axil_wready),
    .s_bresp   (s_axil_bresp),
    .s_bvalid  (s_axil_bvalid),
    .s_bready  (s_axil_bready),
    .s_araddr  (s_axil_araddr),
    .s_arvalid (s_axil_arvalid),
    .s_arready (s_axil_arready),
    .s_rdata   (s_axil_rdata),
    .s_rresp   (s_axil_rresp),
    .s_rvalid  (s_axil_rvalid),
    .s_rready  (s_axil_rready),
    .params    (params),
    .lut       (lut),
    .load_scan (load_scan),
    .start     (start),
    .core_busy (cst != C_IDLE),
    .core_done (core_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst       <= C_IDLE;
      ld_start  <= 1'b0;
      run_start <= 1'b0;
      out_start <= 1'b0;
      core_done <= 1'b0;
      fin       <= '0;
    end else begin
      ld_start  <= 1'b0;
      run_start <= 1'b0;
      out_start <= 1'b0;
      core_done <= 1'b0;
      case (cst)
        C_IDLE: if (start) begin
          ld_start <= 1'b1;
          cst      <= C_LOAD;
        end
        C_LOAD: if (ld_done) begin
          run_start <= 1'b1;
          fin       <= '0;
          cst       <= C_RUN;
        end
        C_RUN: begin
          fin <= fin | gm_done;
          if ((fin | gm_done) == '1) begin
            out_start <= 1'b1;
            cst       <= C_OUT;
          end
        end
        C_OUT: if (out_done) begin
          core_done <= 1'b1;
          cst       <= C_IDLE;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  // ----------------------------------------------------------------- loader
  logic              scan_we;
  logic [SA-1:0]     scan_waddr;
  scan_t             scan_wdata;
  logic [N_PAR-1:0]  pose_we, map_we;
  pose_t             pose_wdata;
  logic [RA-1:0]     map_wrow;
  logic [MAP_SIZE-1:0] map_wdata;

  stream_loader #(.N_PAR(N_PAR), .MAP_SIZE(MAP_SIZE), .MAX_SCANS(MAX_SCANS)) u_loader (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (ld_start),
    .load_scan (load_scan),
    .num_scans (params.num_scans),
    .s_tdata   (s_axis_tdata),
    .s_tvalid  (s_axis_tvalid),
    .s_tready  (s_axis_tready),
    .s_tlast   (s_axis_tlast),
    .scan_we   (scan_we),
    .scan_waddr(scan_waddr),
    .scan_wdata(scan_wdata),
    .pose_we   (pose_we),
    .pose_wdata(pose_wdata),
    .map_we    (map_we),
    .map_wrow  (map_wrow),
    .map_wdata (map_wdata),
    .busy      (ld_busy),
    .done      (ld_done)
  );

  // ------------------------------------------------------------ submodules
  pose_t [N_PAR-1:0] res_pose;
  fix_t  [N_PAR-1:0] res_score;

  for (genvar k = 0; k < N_PAR; k++) begin : g_par
    pose_t init_pose;
    always_ff @(posedge clk) if (pose_we[k]) init_pose <= pose_wdata;

    logic               s_rd_en;
    logic [SA-1:0]      s_rd_addr;
    scan_t              s_rd_data;
    logic               m_rd_en;
    logic signed [31:0] hcx, hcy, mcx, mcy;
    win_t               hwin, mwin;
    logic [15:0]        n_improve, n_halve;

    scan_buffer #(.MAX_SCANS(MAX_SCANS)) u_scan (
      .clk    (clk),
      .wr_en  (scan_we),
      .wr_addr(scan_waddr),
      .wr_data(scan_wdata),
      .rd_en  (s_rd_en),
      .rd_addr(s_rd_addr),
      .rd_data(s_rd_data)
    );

    local_map_bram #(.MAP_SIZE(MAP_SIZE)) u_map (
      .clk    (clk),
      .wr_en  (map_we[k]),
      .wr_row (map_wrow),
      .wr_data(map_wdata),
      .rd_en_a(m_rd_en),
      .cx_a   (hcx),
      .cy_a   (hcy),
      .win_a  (hwin),
      .rd_en_b(m_rd_en),
      .cx_b   (mcx),
      .cy_b   (mcy),
      .win_b  (mwin)
    );

    greedy_matcher #(.W(W), .MAX_SCANS(MAX_SCANS)) u_gm (
      .clk         (clk),
      .rst_n       (rst_n),
      .start       (run_start),
      .init_pose   (init_pose),
      .params      (params),
      .lut         (lut),
      .scan_rd_en  (s_rd_en),
      .scan_rd_addr(s_rd_addr),
      .scan_rd_data(s_rd_data),
      .map_rd_en   (m_rd_en),
      .hit_cx      (hcx),
      .hit_cy      (hcy),
      .miss_cx     (mcx),
      .miss_cy     (mcy),
      .hit_win     (hwin),
      .miss_win    (mwin),
      .busy        (gm_busy[k]),
      .done        (gm_done[k]),
      .pose_out    (res_pose[k]),
      .score_out   (res_score[k]),
      .n_improve   (n_improve),
      .n_halve     (n_halve)
    );
  end

  // ---------------------------------------------------------------- results
  result_streamer #(.N_PAR(N_PAR)) u_out (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (out_start),
    .poses   (res_pose),
    .scores  (res_score),
    .m_tdata (m_axis_tdata),
    .m_tvalid(m_axis_tvalid),
    .m_tready(m_axis_tready),
    .m_tlast (m_axis_tlast),
    .done    (out_done)
  );

endmodule
