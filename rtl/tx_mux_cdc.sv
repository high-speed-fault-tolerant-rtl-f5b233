// tx_mux_cdc: sender MUX, 120-bit frames at 40 MHz to 40-bit words at 120 MHz.
//
// A dual-port RAM holds FRAMES frames. Port A (40 MHz) writes a whole
// 120-bit frame per clock at address_A, a frame counter. Port B (120 MHz)
// reads the same RAM as 40-bit words at address_B = {frame, word}, word 0
// being frame bits [119:80] (header first). The two counters are the control
// logic: the write counter crosses to the 120 MHz side as a Gray code through
// two flip-flops; the reader starts once START_FILL frames are stored and
// then reads three words per frame, so both sides move 4.8 Gb/s. If a frame
// is missing when word 0 is due, the reader counts an underflow and sends
// all-zero words (no header) until START_FILL frames are stored again. RAM + control logic and the widths and
// clocks follow the paper; the depth, the Gray-code crossing and the start
// threshold are this design's choices.
//
// Timing: tx_word is registered; word_idx tells which third of the frame it
// is. A frame reaches the line about START_FILL frame periods after it is
// written.
module tx_mux_cdc #(
  parameter int unsigned FRAMES     = 4,   // RAM depth in frames (power of 2)
  parameter int unsigned START_FILL = 2
) (
  // port A: frame side, 40 MHz
  input  logic                        clk_wr,
  input  logic                        rst_wr,
  input  logic                        wr_en,
  input  logic [gbt_pkg::FRAME_W-1:0] wr_frame,
  // port B: word side, 120 MHz
  input  logic                        clk_rd,
  input  logic                        rst_rd,
  output logic [gbt_pkg::WORD_W-1:0]  tx_word,
  output logic [1:0]                  word_idx,
  output logic                        tx_valid,
  output logic [15:0]                 underflows
);
  import gbt_pkg::*;

  localparam int unsigned AW = $clog2(FRAMES);

  logic [FRAME_W-1:0] mem [FRAMES];

  // ---- port A
  logic [AW:0] wp_bin, wp_gray;

  always_ff @(posedge clk_wr) begin
    if (rst_wr) begin
      wp_bin  <= '0;
      wp_gray <= '0;
    end else if (wr_en) begin
      mem[wp_bin[AW-1:0]] <= wr_frame;
      wp_bin  <= wp_bin + 1'b1;
      wp_gray <= (wp_bin + 1'b1) ^ ((wp_bin + 1'b1) >> 1);
    end
  end

  // ---- port B
  logic [AW:0] wp_s1, wp_s2, wp_sync, rp;
  logic [1:0]  word;
  logic        running;
  logic [AW:0] fill;

  always_comb begin
    wp_sync = '0;
    for (int i = AW; i >= 0; i--)
      wp_sync[i] = (i == AW) ? wp_s2[i] : wp_sync[i+1] ^ wp_s2[i];
  end
  assign fill = wp_sync - rp;

  always_ff @(posedge clk_rd) begin
    if (rst_rd) begin
      wp_s1      <= '0;
      wp_s2      <= '0;
      rp         <= '0;
      word       <= '0;
      running    <= 1'b0;
      tx_word    <= '0;
      word_idx   <= '0;
      tx_valid   <= 1'b0;
      underflows <= '0;
    end else begin
      wp_s1 <= wp_gray;
      wp_s2 <= wp_s1;
      if (!running) begin
        tx_word  <= '0;
        tx_valid <= 1'b0;
        if (fill >= (AW+1)'(START_FILL)) running <= 1'b1;
      end else if (word == 2'd0 && fill == '0) begin
        tx_word    <= '0;
        tx_valid   <= 1'b0;
        running    <= 1'b0;   // refill to START_FILL before sending again
        underflows <= underflows + 16'd1;
      end else begin
        tx_word  <= mem[rp[AW-1:0]][FRAME_W-1-WORD_W*word -: WORD_W];
        word_idx <= word;
        tx_valid <= 1'b1;
        if (word == 2'(WORDS_PER_FRAME-1)) begin
          word <= '0;
          rp   <= rp + 1'b1;
        end else begin
          word <= word + 2'd1;
        end
      end
    end
  end
endmodule
