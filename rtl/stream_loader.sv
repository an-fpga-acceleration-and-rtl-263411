// stream_loader: AXI4-Stream slave that fills the core's on-chip buffers with
// the scan, the initial poses and the binary local maps of one invocation.
//
// Stream layout (32-bit words, in this order):
//   scan, only when load_scan is set: num_scans pairs (range, angle), Q16.16
//   then, for particle k = 0..N_PAR-1:
//     pose: x, y, theta (Q16.16)
//     local map: MAP_SIZE rows, row 0 first, each row MAP_SIZE/32 words; bit b
//                of word j of a row is cell x = 32*j + b (1 = occupied)
// The scan is shared by all particles and needs to be sent only once per
// scan-matching phase; later invocations clear load_scan and send poses and
// maps only. The scan is written into every submodule's scan buffer at once.
// TLAST is not needed to find the boundaries and is ignored.
//
// Interface: start (one cycle) begins a load, done (one cycle) ends it.
// s_tready is high while loading. Writes: scan_we/scan_waddr/scan_wdata
// (one per measurement), pose_we[k]/pose_wdata, map_we[k]/map_wrow/map_wdata
// (one per complete map row). Accepts one word per cycle.
//
// Following the source: inputs (1)-(3) over AXI4-Stream, the shared scan sent
// once. This design's choices: word width, order, bit packing, and sending
// the plain binary map (the tripled layout is built on the write side).
//
// Lint: s_tlast is an input only for AXI4-Stream completeness and is unused.
module stream_loader
  import smc_pkg::*;
#(
  parameter int unsigned N_PAR     = 2,
  parameter int unsigned MAP_SIZE  = 256,
  parameter int unsigned MAX_SCANS = 512
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         load_scan,
  input  logic [15:0]                  num_scans,
  // AXI4-Stream slave
  input  logic [31:0]                  s_tdata,
  input  logic                         s_tvalid,
  output logic                         s_tready,
  input  logic                         s_tlast,
  // buffer writes
  output logic                         scan_we,
  output logic [$clog2(MAX_SCANS)-1:0] scan_waddr,
  output scan_t                        scan_wdata,
  output logic [N_PAR-1:0]             pose_we,
  output pose_t                        pose_wdata,
  output logic [N_PAR-1:0]             map_we,
  output logic [$clog2(MAP_SIZE)-1:0]  map_wrow,
  output logic [MAP_SIZE-1:0]          map_wdata,
  output logic                         busy,
  output logic                         done
);

  localparam int unsigned WPR = MAP_SIZE / 32;           // words per map row
  localparam int unsigned SA  = $clog2(MAX_SCANS);
  localparam int unsigned RA  = $clog2(MAP_SIZE);
  localparam int unsigned PA  = (N_PAR > 1) ? $clog2(N_PAR) : 1;
  localparam int unsigned CA  = (WPR > 1) ? $clog2(WPR) : 1;

  typedef enum logic [1:0] {L_IDLE, L_SCAN, L_POSE, L_MAP} lstate_t;

  lstate_t     st;
  logic [15:0] n_scan, scan_i;
  logic        half;
  fix_t        r_q;
  logic [1:0]  pw;
  fix_t        px_q, py_q;
  logic [PA-1:0] part;
  logic [RA-1:0] row;
  logic [CA-1:0] col;
  logic [MAP_SIZE-32-1:0] row_buf;

  logic accept;
  assign s_tready = (st != L_IDLE);
  assign accept   = s_tvalid && s_tready;
  assign busy     = (st != L_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= L_IDLE;
      done    <= 1'b0;
      scan_we <= 1'b0;
      pose_we <= '0;
      map_we  <= '0;
      half    <= 1'b0;
      pw      <= '0;
      part    <= '0;
      row     <= '0;
      col     <= '0;
      scan_i  <= '0;
      n_scan  <= '0;
      r_q     <= '0;
      px_q    <= '0;
      py_q    <= '0;
      scan_waddr <= '0;
      scan_wdata <= '0;
      pose_wdata <= '0;
      map_wrow   <= '0;
      map_wdata  <= '0;
      row_buf    <= '0;
    end else begin
      done    <= 1'b0;
      scan_we <= 1'b0;
      pose_we <= '0;
      map_we  <= '0;
      case (st)
        L_IDLE: if (start) begin
          n_scan <= (num_scans > 16'(MAX_SCANS)) ? 16'(MAX_SCANS) : num_scans;
          scan_i <= '0;
          half   <= 1'b0;
          pw     <= '0;
          part   <= '0;
          row    <= '0;
          col    <= '0;
          st     <= (load_scan && num_scans != 0) ? L_SCAN : L_POSE;
        end
        L_SCAN: if (accept) begin
          half <= !half;
          if (!half) r_q <= fix_t'(s_tdata);
          else begin
            scan_we    <= 1'b1;
            scan_waddr <= SA'(scan_i);
            scan_wdata <= '{r: r_q, th: fix_t'(s_tdata)};
            scan_i     <= scan_i + 1'b1;
            if (scan_i + 1'b1 == n_scan) st <= L_POSE;
          end
        end
        L_POSE: if (accept) begin
          pw <= pw + 1'b1;
          if (pw == 2'd0) px_q <= fix_t'(s_tdata);
          if (pw == 2'd1) py_q <= fix_t'(s_tdata);
          if (pw == 2'd2) begin
            pw          <= '0;
            pose_we     <= N_PAR'(1) << part;
            pose_wdata  <= '{x: px_q, y: py_q, th: fix_t'(s_tdata)};
            st          <= L_MAP;
          end
        end
        L_MAP: if (accept) begin
          if (col == CA'(WPR - 1)) begin
            col       <= '0;
            map_we    <= N_PAR'(1) << part;
            map_wrow  <= row;
            map_wdata <= {s_tdata, row_buf};
            row       <= row + 1'b1;
            if (row == RA'(MAP_SIZE - 1)) begin
              if (part == PA'(N_PAR - 1)) begin
                st   <= L_IDLE;
                done <= 1'b1;
              end else begin
                part <= part + 1'b1;
                st   <= L_POSE;
              end
            end
          end else begin
            col <= col + 1'b1;
          end
          row_buf <= (MAP_SIZE-32)'({s_tdata, row_buf} >> 32);
        end
        default: st <= L_IDLE;
      endcase
    end
  end

endmodule
