// aes_enc_pipe: AES cipher (128-, 192- or 256-bit key), fully pipelined,
// one block per clock.
//
// Stage 0 adds round key 0 to the input block; stages 1..Nr (Nr = 10, 12
// or 14 for KEY_BITS = 128, 192, 256) each hold one round: S-box
// substitution, row shifting, column mixing (skipped in the last round, the
// multiplexer of the round datapath) and round-key addition. Every stage is
// registered, so a block enters each clock and its cipher text leaves Nr+1
// clocks later (11 for the default AES-128); a sideband of SIDE_W bits
// (for instance the frame the key stream will be applied to) travels with
// it. The round structure follows the source's encryption flow; unrolling
// it into a pipeline, so that the cipher keeps up with one 120-bit frame per
// 40 MHz clock, is this design's choice. Round keys come from
// aes_key_expand and must be stable while blocks are in flight.
module aes_enc_pipe #(
  parameter int unsigned KEY_BITS = 128,
  parameter int unsigned SIDE_W   = 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [127:0]      rk [aes_pkg::aes_rounds(KEY_BITS)+1],
  input  logic              in_valid,
  input  logic [127:0]      in_block,
  input  logic [SIDE_W-1:0] in_side,
  output logic              out_valid,
  output logic [127:0]      out_block,
  output logic [SIDE_W-1:0] out_side
);
  import aes_pkg::*;

  localparam int unsigned NR = aes_rounds(KEY_BITS);

  logic [127:0]      st   [NR+1];
  logic [SIDE_W-1:0] side [NR+1];
  logic              vld  [NR+1];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i <= NR; i++) begin
        vld[i]  <= 1'b0;
        st[i]   <= '0;
        side[i] <= '0;
      end
    end else begin
      vld[0]  <= in_valid;
      st[0]   <= in_block ^ rk[0];
      side[0] <= in_side;
      for (int i = 1; i <= NR; i++) begin
        vld[i]  <= vld[i-1];
        st[i]   <= enc_round(st[i-1], rk[i], i == NR);
        side[i] <= side[i-1];
      end
    end
  end

  assign out_valid = vld[NR];
  assign out_block = st[NR];
  assign out_side  = side[NR];
endmodule
