// rx_demux_cdc: receiver DEMUX, 40-bit words at 120 MHz to 120-bit frames
// at 40 MHz.
//
// Mirror of tx_mux_cdc. Port A (120 MHz) writes each aligned word at
// address_A = {frame, word}, where word (0, 1, 2) comes from the frame
// aligner, which knows where the header is; word 0 lands in frame bits
// [119:80]. When word 2 of a frame has been written the frame counter moves
// on and crosses to the 40 MHz side as a Gray code through two flip-flops.
// Port B (40 MHz) reads one whole frame per clock at address_B while frames
// are waiting. A frame whose words do not arrive as 0, 1, 2 is dropped.
// The RAM-plus-control structure follows the paper; depth, Gray crossing
// and the drop rule are this design's choices.
//
// Timing: rd_frame/rd_valid are registered in the 40 MHz domain, about three
// 40 MHz clocks after the last word of the frame is written.
module rx_demux_cdc #(
  parameter int unsigned FRAMES = 4   // RAM depth in frames (power of 2)
) (
  // port A: word side, 120 MHz
  input  logic                        clk_wr,
  input  logic                        rst_wr,
  input  logic                        wr_en,
  input  logic [1:0]                  wr_word_idx,
  input  logic [gbt_pkg::WORD_W-1:0]  wr_word,
  // port B: frame side, 40 MHz
  input  logic                        clk_rd,
  input  logic                        rst_rd,
  output logic [gbt_pkg::FRAME_W-1:0] rd_frame,
  output logic                        rd_valid
);
  import gbt_pkg::*;

  localparam int unsigned AW = $clog2(FRAMES);

  logic [WORD_W-1:0] mem [FRAMES][WORDS_PER_FRAME];

  // ---- port A
  logic [AW:0] wp_bin, wp_gray;
  logic [1:0]  expect_idx;

  always_ff @(posedge clk_wr) begin
    if (rst_wr) begin
      wp_bin     <= '0;
      wp_gray    <= '0;
      expect_idx <= '0;
    end else if (wr_en) begin
      if (wr_word_idx == expect_idx || wr_word_idx == 2'd0) begin
        mem[wp_bin[AW-1:0]][wr_word_idx] <= wr_word;
        if (wr_word_idx == 2'(WORDS_PER_FRAME-1)) begin
          expect_idx <= '0;
          wp_bin     <= wp_bin + 1'b1;
          wp_gray    <= (wp_bin + 1'b1) ^ ((wp_bin + 1'b1) >> 1);
        end else begin
          expect_idx <= wr_word_idx + 2'd1;
        end
      end else begin
        expect_idx <= '0;   // broken frame: wait for the next word 0
      end
    end
  end

  // ---- port B
  logic [AW:0] wp_s1, wp_s2, wp_sync, rp;

  always_comb begin
    wp_sync = '0;
    for (int i = AW; i >= 0; i--)
      wp_sync[i] = (i == AW) ? wp_s2[i] : wp_sync[i+1] ^ wp_s2[i];
  end

  always_ff @(posedge clk_rd) begin
    if (rst_rd) begin
      wp_s1    <= '0;
      wp_s2    <= '0;
      rp       <= '0;
      rd_frame <= '0;
      rd_valid <= 1'b0;
    end else begin
      wp_s1 <= wp_gray;
      wp_s2 <= wp_s1;
      if (rp != wp_sync) begin
        rd_frame <= {mem[rp[AW-1:0]][0], mem[rp[AW-1:0]][1], mem[rp[AW-1:0]][2]};
        rd_valid <= 1'b1;
        rp       <= rp + 1'b1;
      end else begin
        rd_valid <= 1'b0;
      end
    end
  end
endmodule
