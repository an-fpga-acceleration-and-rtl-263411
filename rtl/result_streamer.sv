// result_streamer: AXI4-Stream master that returns the refined poses and
// scores of all submodules.
//
// After start it sends, for particle k = 0..N_PAR-1, the four words x, y,
// theta of the refined pose and the score s (all Q16.16), and raises TLAST on
// the last word of the packet (4*N_PAR words). done pulses after the last
// word was accepted. The poses and scores must stay stable while sending.
// The usual AXI4-Stream rule holds: once m_tvalid is high, m_tdata and
// m_tlast do not change until m_tready accepts the word.
//
// Following the source: outputs (5) and (6) over AXI4-Stream. This design's
// choices: word order and packet framing.
//
// Lint: the AXI4-Stream hold assertion uses "disable iff (!rst_n)", so rst_n
// is seen both as asynchronous reset and as a sampled signal (SYNCASYNCNET);
// that is intended.
module result_streamer
  import smc_pkg::*;
#(
  parameter int unsigned N_PAR = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pose_t [N_PAR-1:0] poses,
  input  fix_t  [N_PAR-1:0] scores,
  output logic [31:0]       m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic              m_tlast,
  output logic              done
);

  localparam int unsigned NW = 4 * N_PAR;
  localparam int unsigned IW = $clog2(NW + 1);

  logic [IW-1:0] idx;

  function automatic logic [31:0] word(input int unsigned i, input pose_t [N_PAR-1:0] p,
                                       input fix_t [N_PAR-1:0] s);
    case (i % 4)
      0:       return p[i / 4].x;
      1:       return p[i / 4].y;
      2:       return p[i / 4].th;
      default: return s[i / 4];
    endcase
  endfunction

  assign m_tdata = word(int'(idx), poses, scores);
  assign m_tlast = (idx == IW'(NW - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_tvalid <= 1'b0;
      idx      <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !m_tvalid) begin
        m_tvalid <= 1'b1;
        idx      <= '0;
      end else if (m_tvalid && m_tready) begin
        if (m_tlast) begin
          m_tvalid <= 1'b0;
          done     <= 1'b1;
        end
        idx <= idx + 1'b1;
      end
    end
  end

  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata) && $stable(m_tlast));

endmodule
