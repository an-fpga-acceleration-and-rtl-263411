// local_map_bram: binary local map of one particle, stored so that a whole
// 3x3 searching window can be read in one cycle.
//
// The local map is MAP_SIZE x MAP_SIZE one-bit cells (1 = occupied, i.e. the
// occupancy probability was above the threshold). Instead of one copy, every
// row y of the memory holds, for each column x, the vertical triple
//   ( m(x, y-1), m(x, y), m(x, y+1) )
// so the memory is three times the map. A row of this layout therefore holds
// every 3x3 window centred on that row, laid out horizontally: the window
// around (cx, cy) is the 9 consecutive entries of row cy that belong to
// columns cx-1..cx+1. The three members of the triple are kept as three
// banks (lo, mid, hi) addressed by the same row, which is the horizontal-only
// partitioning of the memory. Entries that fall outside the map (row -1,
// row MAP_SIZE, column -1, column MAP_SIZE) read as 0.
//
// Write port: the map arrives one map row per write (wr_row, wr_data with bit
// x = cell x). Row r is written to mid[r], lo[r+1] and hi[r-1]; writing
// row 0 also clears lo[0], writing the last row clears hi[MAP_SIZE-1].
// Read ports a and b (hit window and missed window): give (cx, cy) with
// rd_en; the window appears on win_* one cycle later. Window bit
// k = (ky+1)*3 + (kx+1) for offsets kx, ky in -1..1. A centre outside the map
// gives an all-zero window.
//
// The tripled layout and the single-cycle window read follow the source's
// figure of the map layout; the write-side expansion from a plain binary
// map and the zero padding at the edges are this design's choices.
module local_map_bram
  import smc_pkg::*;
#(
  parameter int unsigned MAP_SIZE = 256
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [$clog2(MAP_SIZE)-1:0] wr_row,
  input  logic [MAP_SIZE-1:0]     wr_data,
  input  logic                    rd_en_a,
  input  logic signed [31:0]      cx_a,
  input  logic signed [31:0]      cy_a,
  output win_t                    win_a,
  input  logic                    rd_en_b,
  input  logic signed [31:0]      cx_b,
  input  logic signed [31:0]      cy_b,
  output win_t                    win_b
);

  localparam int unsigned AW = $clog2(MAP_SIZE);

  logic [MAP_SIZE-1:0] bank_lo  [MAP_SIZE];  // m(x, y-1)
  logic [MAP_SIZE-1:0] bank_mid [MAP_SIZE];  // m(x, y)
  logic [MAP_SIZE-1:0] bank_hi  [MAP_SIZE];  // m(x, y+1)

  always_ff @(posedge clk) begin
    if (wr_en) begin
      bank_mid[wr_row] <= wr_data;
      if (wr_row != AW'(MAP_SIZE-1)) bank_lo[wr_row + 1'b1] <= wr_data;
      else                           bank_hi[wr_row]        <= '0;
      if (wr_row != '0)              bank_hi[wr_row - 1'b1] <= wr_data;
      else                           bank_lo[wr_row]        <= '0;
    end
  end

  // One read port of the tripled memory: registered row triple and column
  function automatic logic in_range(input logic signed [31:0] v);
    return (v >= 0) && (v < MAP_SIZE);
  endfunction

  logic [MAP_SIZE-1:0] lo_a, mid_a, hi_a, lo_b, mid_b, hi_b;
  logic [AW-1:0]       col_a, col_b;
  logic                ok_a, ok_b;

  always_ff @(posedge clk) begin
    if (rd_en_a) begin
      ok_a  <= in_range(cx_a) && in_range(cy_a);
      col_a <= AW'(cx_a);
      lo_a  <= bank_lo [AW'(cy_a)];
      mid_a <= bank_mid[AW'(cy_a)];
      hi_a  <= bank_hi [AW'(cy_a)];
    end
    if (rd_en_b) begin
      ok_b  <= in_range(cx_b) && in_range(cy_b);
      col_b <= AW'(cx_b);
      lo_b  <= bank_lo [AW'(cy_b)];
      mid_b <= bank_mid[AW'(cy_b)];
      hi_b  <= bank_hi [AW'(cy_b)];
    end
  end

  // Columns cx-1..cx+1 of each bank, zero beyond the map edge
  function automatic win_t pick(input logic [MAP_SIZE-1:0] lo,
                                input logic [MAP_SIZE-1:0] mid,
                                input logic [MAP_SIZE-1:0] hi,
                                input logic [AW-1:0] col, input logic ok);
    logic [MAP_SIZE+1:0] plo, pmid, phi;
    logic [2:0] wl, wm, wh;
    plo  = {1'b0, lo,  1'b0};
    pmid = {1'b0, mid, 1'b0};
    phi  = {1'b0, hi,  1'b0};
    wl = plo [{1'b0, col} +: 3];
    wm = pmid[{1'b0, col} +: 3];
    wh = phi [{1'b0, col} +: 3];
    return ok ? {wh, wm, wl} : '0;
  endfunction

  assign win_a = pick(lo_a, mid_a, hi_a, col_a, ok_a);
  assign win_b = pick(lo_b, mid_b, hi_b, col_b, ok_b);

endmodule
