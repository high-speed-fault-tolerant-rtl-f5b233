// gbt_descrambler: inverse of gbt_scrambler.
//
// Same lane layout (LANES lanes of LANE_W bits, lane 0 at the top, MSB
// earliest) and polynomial: d[n] = s[n] ^ s[n-1] ^ s[n-3] ^ s[n-4] ^ s[n-13],
// where s is the received scrambled stream. The previous received word of
// each lane is kept in a history register, so the descrambler needs no
// seed: after one word it is in step with the scrambler, and a wrong bit
// disturbs only the bits that tap it (at most 5 bits in two words).
// One clock of latency as in the paper; the register layout is this
// design's own.
//
// Interface: s is sampled when en is high; d (registered) follows one clock
// later and holds while en is low.
module gbt_descrambler #(
  parameter int unsigned LANES  = 4,
  parameter int unsigned LANE_W = 13
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic [LANES*LANE_W-1:0] s,
  output logic [LANES*LANE_W-1:0] d
);
  import gbt_pkg::*;

  localparam int unsigned W = LANES * LANE_W;

  logic [W-1:0] hist;
  logic [W-1:0] d_next;

  always_comb begin
    logic [LANE_W-1:0] prev, cur, dout;
    logic b;
    d_next = '0;
    for (int l = 0; l < LANES; l++) begin
      prev = hist[W-1-l*LANE_W -: LANE_W];
      cur  = s[W-1-l*LANE_W -: LANE_W];
      dout = '0;
      for (int t = 0; t < LANE_W; t++) begin
        b = cur[LANE_W-1-t];
        for (int k = 1; k <= SCR_DEG; k++) begin
          if (scr_tap(k)) begin
            if (t - k >= 0) b ^= cur[LANE_W-1-(t-k)];
            else            b ^= prev[-1-(t-k)];
          end
        end
        dout[LANE_W-1-t] = b;
      end
      d_next[W-1-l*LANE_W -: LANE_W] = dout;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      hist <= '1;
      d    <= '0;
    end else if (en) begin
      hist <= s;
      d    <= d_next;
    end
  end

  initial assert (LANE_W >= SCR_DEG) else $error("LANE_W must be at least %0d", SCR_DEG);
endmodule
