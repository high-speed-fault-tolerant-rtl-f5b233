// aes_ctr_crypt: frame encryption (sender) and decryption (receiver).
//
// AES works on 128-bit blocks but a frame has 120 bits, and the receiver
// must find the header before it can cut frames. The frame is therefore
// ciphered in counter mode: every frame takes a new counter block
// {nonce, counter}, the AES cipher turns it into 128 key-stream bits,
// and the top 116 of them are xored onto the 116 bits after the header; the
// header stays in clear. The same module decrypts, since xoring the same
// key stream again restores the frame. A wrong bit on the line stays one
// wrong bit after decryption, so the BCH decoder behind it still corrects
// it. AES-128 as default key size and the place of the block (after interleaving, before
// de-interleaving) follow the paper; counter mode, the clear header and the
// nonce/counter ports are this design's choices. Both ends must agree on
// key, nonce and counter: ctr_load sets the counter used for the frame that
// is presented in the same clock (in_valid high), after which it counts
// frames. With crypt_en low the frame passes in clear.
//
// The low 12 key-stream bits of each block are not needed and left unused.
//
// KEY_BITS selects AES-128 (default), AES-192 or AES-256.
//
// Timing: out_* follow in_* by Nr+1 clocks (the cipher pipeline: 11 for
// AES-128, 13 for AES-192, 15 for AES-256); one frame per clock.
module aes_ctr_crypt #(
  parameter int unsigned KEY_BITS = 128
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        key_load,
  input  logic [KEY_BITS-1:0]         key,
  input  logic [63:0]                 nonce,
  input  logic                        crypt_en,
  input  logic                        ctr_load,
  input  logic [63:0]                 ctr_value,
  input  logic                        in_valid,
  input  logic [gbt_pkg::FRAME_W-1:0] in_frame,
  output logic                        out_valid,
  output logic [gbt_pkg::FRAME_W-1:0] out_frame,
  output logic [63:0]                 out_ctr,
  output logic                        key_ready
);
  import gbt_pkg::*;
  import aes_pkg::*;

  localparam int unsigned SIDE_W = 1 + 64 + FRAME_W;

  logic [127:0]      rk [aes_rounds(KEY_BITS)+1];
  logic [63:0]       ctr, ctr_use;
  logic              ks_valid;
  logic [127:0]      ks;
  logic [SIDE_W-1:0] side_out;
  logic              en_d;
  logic [FRAME_W-1:0] frame_d;

  aes_key_expand #(.KEY_BITS(KEY_BITS)) u_key (
    .clk, .rst, .key_load, .key, .rk, .ready(key_ready)
  );

  assign ctr_use = ctr_load ? ctr_value : ctr;

  always_ff @(posedge clk) begin
    if (rst)           ctr <= '0;
    else if (in_valid) ctr <= ctr_use + 64'd1;
    else if (ctr_load) ctr <= ctr_value;
  end

  aes_enc_pipe #(.KEY_BITS(KEY_BITS), .SIDE_W(SIDE_W)) u_aes (
    .clk, .rst, .rk,
    .in_valid  (in_valid),
    .in_block  ({nonce, ctr_use}),
    .in_side   ({crypt_en, ctr_use, in_frame}),
    .out_valid (ks_valid),
    .out_block (ks),
    .out_side  (side_out)
  );

  assign en_d    = side_out[SIDE_W-1];
  assign out_ctr = side_out[FRAME_W +: 64];
  assign frame_d = side_out[FRAME_W-1:0];

  assign out_valid = ks_valid;
  assign out_frame = en_d ? {frame_d[FRAME_W-1 -: HDR_W],
                             frame_d[PAYLOAD_W-1:0] ^ ks[127 -: PAYLOAD_W]}
                          : frame_d;
endmodule
