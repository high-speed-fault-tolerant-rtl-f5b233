// frame_aligner: frame aligner and pattern search for the receiver.
//
// The deserializer delivers 40-bit words whose boundaries can sit at any bit
// of the 120-bit frame. A right shifter keeps the previous word and cuts a
// 40-bit window out of {previous, current} at a bit offset of 0..39. A state
// machine (pattern search) counts words 0, 1, 2 and, at every word 0, checks
// the top four bits of the window against the two header values, 1010
// (standard frame) and 0101 (frame without FEC):
//   SEARCH  header wrong: bit slip (offset + 1) and try again one frame
//           later; header right: go to VERIFY.
//   VERIFY  LOCK_HEADERS (32) more headers in a row are needed; one wrong
//           header sends it back to SEARCH with a bit slip.
//   LOCKED  words go out with their index for the DEMUX write address and
//           locked is high; UNLOCK_MISSES wrong headers in a row drop the
//           lock.
// When the offset wraps from 39 to 0 the word counter steps one extra word,
// so each slip moves the frame boundary by exactly one bit and 120 slips
// visit every position of the frame. Header values, the right shifter, the
// bit-slip loop, the 32 confirming headers and the locked status follow the
// paper; the state split, the unlock rule and the counters are this
// design's choices.
//
// Timing: 120 MHz, word in, aligned word out two clocks later.
module frame_aligner #(
  parameter int unsigned LOCK_HEADERS  = 32,
  parameter int unsigned UNLOCK_MISSES = 4
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [gbt_pkg::WORD_W-1:0] rx_word,
  output logic [gbt_pkg::WORD_W-1:0] al_word,
  output logic [1:0]                 al_word_idx,
  output logic                       al_valid,
  output logic                       locked,
  output logic [15:0]                bitslips,
  output logic [15:0]                lock_count
);
  import gbt_pkg::*;

  typedef enum logic [1:0] {SEARCH, VERIFY, LOCKED} state_t;

  state_t            state;
  logic [WORD_W-1:0] prev;
  logic [WORD_W-1:0] sh_word;
  logic [5:0]        offset;
  logic [1:0]        word_cnt;
  logic [5:0]        hits;
  logic [3:0]        misses;
  logic              hdr_ok;
  logic              slip;

  // ---- right shifter
  logic [WORD_W-1:0] window;
  assign window = WORD_W'({prev, rx_word} >> offset);

  always_ff @(posedge clk) begin
    if (rst) begin
      prev    <= '0;
      sh_word <= '0;
    end else begin
      prev    <= rx_word;
      sh_word <= window;
    end
  end

  // ---- pattern search
  assign hdr_ok = (sh_word[WORD_W-1 -: HDR_W] == HDR_FEC) ||
                  (sh_word[WORD_W-1 -: HDR_W] == HDR_NOFEC);

  always_comb begin
    slip = 1'b0;
    if (word_cnt == 2'd0 && !hdr_ok) begin
      case (state)
        SEARCH, VERIFY: slip = 1'b1;
        LOCKED:         slip = (misses == 4'(UNLOCK_MISSES - 1));
        default:        slip = 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= SEARCH;
      offset     <= '0;
      word_cnt   <= '0;
      hits       <= '0;
      misses     <= '0;
      bitslips   <= '0;
      lock_count <= '0;
    end else begin
      // word counter, with one extra step when the offset wraps
      if (slip && offset == 6'(WORD_W - 1))
        word_cnt <= (word_cnt == 2'd0) ? 2'd2 : word_cnt - 2'd1;
      else
        word_cnt <= (word_cnt == 2'(WORDS_PER_FRAME - 1)) ? 2'd0 : word_cnt + 2'd1;

      if (slip) begin
        offset   <= (offset == 6'(WORD_W - 1)) ? 6'd0 : offset + 6'd1;
        bitslips <= bitslips + 16'd1;
      end

      if (word_cnt == 2'd0) begin
        case (state)
          SEARCH: if (hdr_ok) begin
            state <= VERIFY;
            hits  <= '0;
          end
          VERIFY: if (!hdr_ok) begin
            state <= SEARCH;
          end else if (hits == 6'(LOCK_HEADERS - 1)) begin
            state      <= LOCKED;
            misses     <= '0;
            lock_count <= lock_count + 16'd1;
          end else begin
            hits <= hits + 6'd1;
          end
          LOCKED: if (hdr_ok) begin
            misses <= '0;
          end else if (slip) begin
            state <= SEARCH;
          end else begin
            misses <= misses + 4'd1;
          end
          default: state <= SEARCH;
        endcase
      end
    end
  end

  assign locked      = (state == LOCKED);
  assign al_word     = sh_word;
  assign al_word_idx = word_cnt;
  assign al_valid    = locked;
endmodule
