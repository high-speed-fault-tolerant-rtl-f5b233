// gbt_interleaver: block interleaver for standard frames.
//
// A burst of wrong bits on the fibre should not fall on one codeword. The
// frame is split into two 60-bit halves (the paper's choice); each half is a
// 4-row block interleaver, written row by row and read column by column, so
// bits that are next to each other on the line came from bits 14 or 15
// apart in the frame, which lie in different codewords. The 4 header bits
// at the top of half 0 keep their place (the paper requires this for frame
// synchronisation), so half 0 interleaves 56 bits (4 x 14) and half 1 60
// bits (4 x 15); the mapping is gbt_pkg::ilv_src. Frames whose header is not
// 1010 (frames without FEC) pass unchanged. The row/column sizes and the
// header exception are this design's choices.
//
// Purely combinational: no clock of latency, as in the paper.
module gbt_interleaver (
  input  logic [gbt_pkg::FRAME_W-1:0] din,
  output logic [gbt_pkg::FRAME_W-1:0] dout
);
  import gbt_pkg::*;

  logic [FRAME_W-1:0] perm;

  // Position p counts from the first bit sent, i.e. bit FRAME_W-1-p.
  for (genvar p = 0; p < FRAME_W; p++) begin : g_map
    assign perm[FRAME_W-1-p] = din[FRAME_W-1-ilv_src(p)];
  end

  assign dout = (din[FRAME_W-1 -: HDR_W] == HDR_FEC) ? perm : din;
endmodule
