// gbt_scrambler: self-synchronising (multiplicative) scrambler.
//
// The input word is cut into LANES lanes of LANE_W bits, lane 0 at the top;
// every lane is scrambled on its own and all lanes in the same clock. Inside
// a lane the most significant bit is taken as the earliest, and each output
// bit is  s[n] = d[n] ^ s[n-1] ^ s[n-3] ^ s[n-4] ^ s[n-13]  (a degree-13
// polynomial, taps in gbt_pkg::scr_tap), where the older bits come from the
// same lane's previous output word. Because the receiver only needs the last
// 13 received bits, it resynchronises by itself after any error.
// The default 4 x 13 lanes, the one clock of latency and the 13-bit
// polynomial follow the paper; the tap positions, the MSB-first order and the
// all-ones reset state are this design's choices (LANE_W >= 13 is required).
//
// Interface: d is sampled when en is high; q (registered) is valid one clock
// later and holds its value while en is low.
module gbt_scrambler #(
  parameter int unsigned LANES  = 4,
  parameter int unsigned LANE_W = 13
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic [LANES*LANE_W-1:0] d,
  output logic [LANES*LANE_W-1:0] q
);
  import gbt_pkg::*;

  localparam int unsigned W = LANES * LANE_W;

  logic [W-1:0] s_next;

  // Bit of the lane stream at time t relative to the current word
  // (t < 0 reaches into the previous output word).
  always_comb begin
    logic [LANE_W-1:0] prev, cur, din;
    logic b;
    s_next = '0;
    for (int l = 0; l < LANES; l++) begin
      prev = q[W-1-l*LANE_W -: LANE_W];
      din  = d[W-1-l*LANE_W -: LANE_W];
      cur  = '0;
      for (int t = 0; t < LANE_W; t++) begin
        b = din[LANE_W-1-t];
        for (int k = 1; k <= SCR_DEG; k++) begin
          if (scr_tap(k)) begin
            if (t - k >= 0) b ^= cur[LANE_W-1-(t-k)];
            else            b ^= prev[-1-(t-k)];
          end
        end
        cur[LANE_W-1-t] = b;
      end
      s_next[W-1-l*LANE_W -: LANE_W] = cur;
    end
  end

  always_ff @(posedge clk) begin
    if (rst)     q <= '1;
    else if (en) q <= s_next;
  end

  initial assert (LANE_W >= SCR_DEG) else $error("LANE_W must be at least %0d", SCR_DEG);
endmodule
