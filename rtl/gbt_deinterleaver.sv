// gbt_deinterleaver: undoes gbt_interleaver at the receiver.
//
// Bit at line position p goes back to frame position ilv_src(p) (gbt_pkg),
// restoring the codeword order for the BCH decoders. The header is not
// moved by interleaving, so it selects the mode here too: only frames with
// header 1010 are reordered.
//
// Purely combinational.
module gbt_deinterleaver (
  input  logic [gbt_pkg::FRAME_W-1:0] din,
  output logic [gbt_pkg::FRAME_W-1:0] dout
);
  import gbt_pkg::*;

  logic [FRAME_W-1:0] perm;

  for (genvar p = 0; p < FRAME_W; p++) begin : g_map
    assign perm[FRAME_W-1-ilv_src(p)] = din[FRAME_W-1-p];
  end

  assign dout = (din[FRAME_W-1 -: HDR_W] == HDR_FEC) ? perm : din;
endmodule
