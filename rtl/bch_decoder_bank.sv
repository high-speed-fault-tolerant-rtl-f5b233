// bch_decoder_bank: eight BCH(15,7,2) decoders in parallel on one frame.
//
// Takes a de-interleaved frame. If its header is 1010 (standard frame),
// codeword k = {frame[119-7k -: 7] (message, the header is the top of
// message 0), FEC[63-8k -: 8]} goes to decoder k, and the corrected 56-bit
// message {header, 52 data bits} comes out; up to 2 wrong bits per codeword,
// 16 per frame, are corrected. Any other header (0101, frame without FEC)
// passes the 116 payload bits unchanged. The split into eight codewords
// follows the paper; the pass-through and the statistics outputs are this
// design's choices.
//
// Timing: one register; outputs belong to the frame given one clock before.
// payload = {52 data bits, 64 wide bits (zero for standard frames)}.
module bch_decoder_bank (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          en,
  input  logic [gbt_pkg::FRAME_W-1:0]   frame,
  output logic                          out_valid,
  output logic                          fec_mode,
  output logic [gbt_pkg::HDR_W-1:0]     hdr,        // corrected header
  output logic [gbt_pkg::PAYLOAD_W-1:0] payload,
  output logic [4:0]                    corrected,  // bits corrected in the frame
  output logic                          uncorrectable
);
  import gbt_pkg::*;

  logic [MSG_W-1:0]       msg_in, msg_out;
  logic [WIDE_W-1:0]      fec;
  logic [BCH_BLOCKS-1:0]  unc;
  logic [1:0]             nerr [BCH_BLOCKS];
  logic [4:0]             nsum;
  logic                   is_fec;

  assign msg_in = frame[FRAME_W-1 -: MSG_W];
  assign fec    = frame[WIDE_W-1:0];
  assign is_fec = (frame[FRAME_W-1 -: HDR_W] == HDR_FEC);

  for (genvar k = 0; k < BCH_BLOCKS; k++) begin : g_dec
    bch15_7_decoder u_dec (
      .cw            ({msg_in[MSG_W-1-k*BCH_K -: BCH_K], fec[WIDE_W-1-k*BCH_P -: BCH_P]}),
      .msg           (msg_out[MSG_W-1-k*BCH_K -: BCH_K]),
      .nerr          (nerr[k]),
      .uncorrectable (unc[k])
    );
  end

  always_comb begin
    nsum = '0;
    for (int k = 0; k < BCH_BLOCKS; k++) nsum += 5'(nerr[k]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid     <= 1'b0;
      fec_mode      <= 1'b0;
      hdr           <= '0;
      payload       <= '0;
      corrected     <= '0;
      uncorrectable <= 1'b0;
    end else begin
      out_valid <= en;
      if (en) begin
        fec_mode <= is_fec;
        if (is_fec) begin
          hdr           <= msg_out[MSG_W-1 -: HDR_W];
          payload       <= {msg_out[DATA_W-1:0], {WIDE_W{1'b0}}};
          corrected     <= nsum;
          uncorrectable <= |unc;
        end else begin
          hdr           <= frame[FRAME_W-1 -: HDR_W];
          payload       <= frame[PAYLOAD_W-1:0];
          corrected     <= '0;
          uncorrectable <= 1'b0;
        end
      end
    end
  end
endmodule
