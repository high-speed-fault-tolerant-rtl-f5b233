// gbt_link_top: sender and receiver chains of the GBT link emulator.
//
// Sender (one FPGA, 40/120 MHz): detector data (4 slow-control + 48 data
// bits, plus 64 more bits for frames without FEC) -> scrambler (four 13-bit
// lanes) -> eight parallel BCH(15,7,2) encoders building the 120-bit frame
// with header 1010 (or header 0101 and no coding when fec_mode is low) ->
// block interleaver (header kept in place) -> AES counter-mode (AES-128 by
// default, AES_KEY_BITS = 192 or 256 selectable)
// encryption (header in clear) -> MUX, a dual-port RAM turning one frame per
// 40 MHz clock into three 40-bit words per 120 MHz clock -> tx_word, which
// feeds the transceiver's serializer at 4.8 Gb/s.
// Receiver (other FPGA): rx_word from the deserializer -> frame aligner
// (right shifter + pattern search with bit slip, locked after 33 good
// headers) -> DEMUX back to 120-bit frames at 40 MHz -> decryption ->
// de-interleaver -> BCH decoders (up to 2 bits per codeword) ->
// descrambler -> asynchronous FIFO read by the DMA engine at the PCIe clock.
// The serializer/deserializer (transceiver), the PCIe core and the DMA are
// not part of this RTL; their signals are ports. The chain and its order
// follow the paper's data-flow description; where the paper's block diagram
// puts encryption next to the serializer instead, this design follows the
// text (encryption right after interleaving), because the cipher needs whole
// frames and the aligner needs the header in clear.
//
// Latency, sender: scrambler 1, encoder 1, cipher 11 clocks of 40 MHz, then
// START_FILL frames in the MUX RAM. Receiver: aligner 2 clocks of 120 MHz,
// DEMUX about 3, cipher 11, decoder 1, descrambler 1 clocks of 40 MHz. The
// cipher latency is for AES-128; it is 13 for AES-192 and 15 for AES-256.
module gbt_link_top #(
  parameter int unsigned MUX_FRAMES    = 4,
  parameter int unsigned FIFO_DEPTH    = 512,
  parameter int unsigned LOCK_HEADERS  = 32,
  parameter int unsigned UNLOCK_MISSES = 4,
  parameter int unsigned AES_KEY_BITS  = 128   // 128, 192 or 256
) (
  // ---------------- sender
  input  logic                        tx_clk40,
  input  logic                        tx_rst40,
  input  logic                        tx_clk120,
  input  logic                        tx_rst120,
  input  logic                        tx_data_valid,
  input  logic                        tx_fec_mode,   // 1: standard frame
  input  logic [3:0]                  tx_sc,
  input  logic [47:0]                 tx_data,
  input  logic [63:0]                 tx_wide,       // used by frames without FEC
  input  logic                        tx_key_load,
  input  logic [AES_KEY_BITS-1:0]     tx_key,
  input  logic [63:0]                 tx_nonce,
  input  logic                        tx_crypt_en,
  output logic                        tx_key_ready,
  output logic [gbt_pkg::WORD_W-1:0]  tx_word,       // to serializer
  output logic [1:0]                  tx_word_idx,   // 0: word holding the header
  output logic                        tx_word_valid,
  output logic [63:0]                 tx_ctr,        // counter of the last frame ciphered
  output logic [15:0]                 tx_underflows,
  // ---------------- receiver
  input  logic                        rx_clk120,
  input  logic                        rx_rst120,
  input  logic                        rx_clk40,
  input  logic                        rx_rst40,
  input  logic [gbt_pkg::WORD_W-1:0]  rx_word,       // from deserializer
  input  logic                        rx_key_load,
  input  logic [AES_KEY_BITS-1:0]     rx_key,
  input  logic [63:0]                 rx_nonce,
  input  logic                        rx_crypt_en,
  input  logic                        rx_ctr_load,
  input  logic [63:0]                 rx_ctr_value,
  output logic                        rx_key_ready,
  output logic [63:0]                 rx_ctr,        // counter of the last frame deciphered
  output logic [gbt_pkg::HDR_W-1:0]   rx_header,     // corrected header of the last frame
  output logic                        rx_locked,
  output logic [15:0]                 rx_bitslips,
  output logic [15:0]                 rx_lock_count,
  output logic [31:0]                 rx_frames,
  output logic [31:0]                 rx_corrected_bits,
  output logic [31:0]                 rx_uncorrectable,
  // ---------------- PCIe / DMA side of the FIFO
  input  logic                        pcie_clk,
  input  logic                        pcie_rst,
  input  logic                        fifo_rd_en,
  output gbt_pkg::rx_word_t           fifo_rd_data,
  output logic                        fifo_empty,
  output logic                        fifo_full,
  output logic [15:0]                 fifo_overflows
);
  import gbt_pkg::*;

  // ================================================================ sender
  logic [DATA_W-1:0]  scr_data;
  logic [WIDE_W-1:0]  scr_wide;
  logic               scr_valid, scr_mode;
  logic [FRAME_W-1:0] enc_frame, ilv_frame, enc_out_frame;
  logic               enc_valid, enc_out_valid;

  gbt_scrambler #(.LANES(4), .LANE_W(13)) u_scr (
    .clk(tx_clk40), .rst(tx_rst40), .en(tx_data_valid),
    .d({tx_sc, tx_data}), .q(scr_data)
  );

  // The wide field only carries data in frames without FEC.
  gbt_scrambler #(.LANES(4), .LANE_W(16)) u_scr_wide (
    .clk(tx_clk40), .rst(tx_rst40), .en(tx_data_valid && !tx_fec_mode),
    .d(tx_wide), .q(scr_wide)
  );

  always_ff @(posedge tx_clk40) begin
    if (tx_rst40) begin
      scr_valid <= 1'b0;
      scr_mode  <= 1'b1;
    end else begin
      scr_valid <= tx_data_valid;
      if (tx_data_valid) scr_mode <= tx_fec_mode;
    end
  end

  bch_encoder_bank u_enc (
    .clk(tx_clk40), .rst(tx_rst40), .en(scr_valid), .fec_mode(scr_mode),
    .data(scr_data), .wide(scr_wide), .frame(enc_frame), .frame_valid(enc_valid)
  );

  gbt_interleaver u_ilv (.din(enc_frame), .dout(ilv_frame));

  aes_ctr_crypt #(.KEY_BITS(AES_KEY_BITS)) u_enc_aes (
    .clk(tx_clk40), .rst(tx_rst40),
    .key_load(tx_key_load), .key(tx_key), .nonce(tx_nonce),
    .crypt_en(tx_crypt_en), .ctr_load(1'b0), .ctr_value(64'd0),
    .in_valid(enc_valid), .in_frame(ilv_frame),
    .out_valid(enc_out_valid), .out_frame(enc_out_frame), .out_ctr(tx_ctr),
    .key_ready(tx_key_ready)
  );

  tx_mux_cdc #(.FRAMES(MUX_FRAMES), .START_FILL(2)) u_mux (
    .clk_wr(tx_clk40), .rst_wr(tx_rst40), .wr_en(enc_out_valid), .wr_frame(enc_out_frame),
    .clk_rd(tx_clk120), .rst_rd(tx_rst120),
    .tx_word(tx_word), .word_idx(tx_word_idx), .tx_valid(tx_word_valid),
    .underflows(tx_underflows)
  );

  // ============================================================== receiver
  logic [WORD_W-1:0]  al_word;
  logic [1:0]         al_idx;
  logic               al_valid;
  logic [FRAME_W-1:0] dmx_frame, dec_frame, dil_frame;
  logic               dmx_valid, dec_valid;

  frame_aligner #(.LOCK_HEADERS(LOCK_HEADERS), .UNLOCK_MISSES(UNLOCK_MISSES)) u_align (
    .clk(rx_clk120), .rst(rx_rst120), .rx_word(rx_word),
    .al_word(al_word), .al_word_idx(al_idx), .al_valid(al_valid),
    .locked(rx_locked), .bitslips(rx_bitslips), .lock_count(rx_lock_count)
  );

  rx_demux_cdc #(.FRAMES(MUX_FRAMES)) u_demux (
    .clk_wr(rx_clk120), .rst_wr(rx_rst120),
    .wr_en(al_valid), .wr_word_idx(al_idx), .wr_word(al_word),
    .clk_rd(rx_clk40), .rst_rd(rx_rst40), .rd_frame(dmx_frame), .rd_valid(dmx_valid)
  );

  aes_ctr_crypt #(.KEY_BITS(AES_KEY_BITS)) u_dec_aes (
    .clk(rx_clk40), .rst(rx_rst40),
    .key_load(rx_key_load), .key(rx_key), .nonce(rx_nonce),
    .crypt_en(rx_crypt_en), .ctr_load(rx_ctr_load), .ctr_value(rx_ctr_value),
    .in_valid(dmx_valid), .in_frame(dmx_frame),
    .out_valid(dec_valid), .out_frame(dec_frame), .out_ctr(rx_ctr),
    .key_ready(rx_key_ready)
  );

  gbt_deinterleaver u_dil (.din(dec_frame), .dout(dil_frame));

  logic                 bch_valid, bch_fec, bch_unc;
  logic [PAYLOAD_W-1:0] bch_payload;
  logic [4:0]           bch_corr;

  bch_decoder_bank u_dec (
    .clk(rx_clk40), .rst(rx_rst40), .en(dec_valid), .frame(dil_frame),
    .out_valid(bch_valid), .fec_mode(bch_fec), .hdr(rx_header), .payload(bch_payload),
    .corrected(bch_corr), .uncorrectable(bch_unc)
  );

  logic [DATA_W-1:0] dsc_data;
  logic [WIDE_W-1:0] dsc_wide;
  logic              dsc_valid, dsc_fec, dsc_unc;

  gbt_descrambler #(.LANES(4), .LANE_W(13)) u_dsc (
    .clk(rx_clk40), .rst(rx_rst40), .en(bch_valid),
    .s(bch_payload[PAYLOAD_W-1 -: DATA_W]), .d(dsc_data)
  );

  gbt_descrambler #(.LANES(4), .LANE_W(16)) u_dsc_wide (
    .clk(rx_clk40), .rst(rx_rst40), .en(bch_valid && !bch_fec),
    .s(bch_payload[WIDE_W-1:0]), .d(dsc_wide)
  );

  always_ff @(posedge rx_clk40) begin
    if (rx_rst40) begin
      dsc_valid         <= 1'b0;
      dsc_fec           <= 1'b0;
      dsc_unc           <= 1'b0;
      rx_frames         <= '0;
      rx_corrected_bits <= '0;
      rx_uncorrectable  <= '0;
    end else begin
      dsc_valid <= bch_valid;
      if (bch_valid) begin
        dsc_fec           <= bch_fec;
        dsc_unc           <= bch_unc;
        rx_frames         <= rx_frames + 32'd1;
        rx_corrected_bits <= rx_corrected_bits + 32'(bch_corr);
        rx_uncorrectable  <= rx_uncorrectable + 32'(bch_unc);
      end
    end
  end

  rx_word_t fifo_in;
  assign fifo_in = '{fec_mode:      dsc_fec,
                     uncorrectable: dsc_unc,
                     payload:       {dsc_data, dsc_fec ? {WIDE_W{1'b0}} : dsc_wide}};

  async_fifo #(.WIDTH($bits(rx_word_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wr_clk(rx_clk40), .wr_rst(rx_rst40), .wr_en(dsc_valid), .wr_data(fifo_in),
    .full(fifo_full), .overflows(fifo_overflows),
    .rd_clk(pcie_clk), .rd_rst(pcie_rst), .rd_en(fifo_rd_en),
    .rd_data(fifo_rd_data), .empty(fifo_empty)
  );
endmodule
