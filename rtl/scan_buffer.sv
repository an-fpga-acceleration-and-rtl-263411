// scan_buffer: on-chip store of the current LiDAR scan for one submodule.
//
// Holds up to MAX_SCANS measurements [range, angle] (Q16.16 each). Each
// submodule owns a copy so that all of them read measurements in parallel;
// the stream loader writes the same scan into every copy at once.
//
// Write port: wr_en, wr_addr, wr_data. Read port: rd_en, rd_addr; rd_data is
// valid one cycle later (block-RAM read timing).
//
// The per-submodule copy follows the source's block diagram; the depth
// MAX_SCANS is this design's choice (the source gives none).
module scan_buffer
  import smc_pkg::*;
#(
  parameter int unsigned MAX_SCANS = 512
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(MAX_SCANS)-1:0] wr_addr,
  input  scan_t                        wr_data,
  input  logic                         rd_en,
  input  logic [$clog2(MAX_SCANS)-1:0] rd_addr,
  output scan_t                        rd_data
);

  scan_t mem [MAX_SCANS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
