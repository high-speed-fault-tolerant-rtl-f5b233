// gbt_pkg: frame format, code and permutation definitions shared by the
// sender and receiver chains of the GBT link emulator.
//
// Frame (120 bits, one per 40 MHz cycle, bit 119 sent first):
//   standard frame    [119:116] header 1010, [115:112] slow control,
//                     [111:64] user data, [63:0] FEC (parity of encoder k in
//                     [63-8k -: 8]); afterwards interleaved, header fixed
//   frame without FEC [119:116] header 0101, [115:0] data
// The 56 bits {header, scrambled slow control + data} feed eight BCH(15,7,2)
// encoders, 7 bits each, encoder 0 taking the top bits. The code uses the
// generator g(x) = x^8+x^7+x^6+x^4+1 = m1(x) m3(x) over GF(16) built on
// x^4+x+1; a codeword is {message[6:0], parity[7:0]} with bit j the
// coefficient of x^j.
package gbt_pkg;

  localparam int unsigned FRAME_W     = 120;
  localparam int unsigned WORD_W      = 40;
  localparam int unsigned WORDS_PER_FRAME = FRAME_W / WORD_W;   // 3
  localparam int unsigned HDR_W       = 4;
  localparam int unsigned PAYLOAD_W   = FRAME_W - HDR_W;        // 116
  localparam int unsigned DATA_W      = 52;   // slow control (4) + user data (48)
  localparam int unsigned WIDE_W      = PAYLOAD_W - DATA_W;     // 64, FEC field
  localparam int unsigned BCH_N       = 15;
  localparam int unsigned BCH_K       = 7;
  localparam int unsigned BCH_P       = BCH_N - BCH_K;          // 8
  localparam int unsigned BCH_BLOCKS  = 8;
  localparam int unsigned MSG_W       = BCH_BLOCKS * BCH_K;     // 56

  localparam logic [HDR_W-1:0] HDR_FEC   = 4'b1010;
  localparam logic [HDR_W-1:0] HDR_NOFEC = 4'b0101;

  localparam logic [BCH_P:0] BCH_GEN = 9'b1_1101_0001;  // x^8+x^7+x^6+x^4+1

  // Scrambler polynomial: s[n] = d[n] ^ s[n-1] ^ s[n-3] ^ s[n-4] ^ s[n-13].
  localparam int unsigned SCR_DEG = 13;

  function automatic logic scr_tap(input int unsigned k);
    return (k == 1) || (k == 3) || (k == 4) || (k == 13);
  endfunction

  // ---------------------------------------------------------------- BCH ---
  // Parity of a message: remainder of m(x) x^8 divided by g(x).
  function automatic logic [BCH_P-1:0] bch_parity(input logic [BCH_K-1:0] m);
    logic [BCH_N-1:0] r;
    r = {m, {BCH_P{1'b0}}};
    for (int i = BCH_N - 1; i >= BCH_P; i--)
      if (r[i]) r[i -: BCH_P+1] = r[i -: BCH_P+1] ^ BCH_GEN;
    return r[BCH_P-1:0];
  endfunction

  function automatic logic [3:0] gf16_mul(input logic [3:0] a, input logic [3:0] b);
    logic [3:0] r;
    logic [3:0] x;
    r = '0;
    x = a;
    for (int i = 0; i < 4; i++) begin
      if (b[i]) r ^= x;
      x = {x[2:0], 1'b0} ^ (x[3] ? 4'b0011 : 4'b0000);
    end
    return r;
  endfunction

  // alpha^e, e taken modulo 15.
  function automatic logic [3:0] gf16_alpha(input int unsigned e);
    logic [3:0] r;
    r = 4'b0001;
    for (int unsigned i = 0; i < e % 15; i++) r = gf16_mul(r, 4'b0010);
    return r;
  endfunction

  // a^-1 = a^14 (0 maps to 0).
  function automatic logic [3:0] gf16_inv(input logic [3:0] a);
    logic [3:0] r;
    r = 4'b0001;
    for (int i = 0; i < 14; i++) r = gf16_mul(r, a);
    return r;
  endfunction

  // --------------------------------------------------------- interleaver ---
  // Positions p count from the first bit sent (p = 0 is frame bit 119).
  // Half 0 is p = 0..59, half 1 is p = 60..119. The header (p = 0..3) never
  // moves. The other 56 bits of half 0 and the 60 bits of half 1 are each a
  // block interleaver of 4 rows: written row by row, read column by column.
  // ilv_src(p) gives the pre-interleaving position that lands on position p.
  function automatic int unsigned ilv_src(input int unsigned p);
    int unsigned base, n, cols, q;
    if (p < HDR_W) return p;
    base = (p < FRAME_W/2) ? HDR_W : FRAME_W/2;
    n    = (p < FRAME_W/2) ? FRAME_W/2 - HDR_W : FRAME_W/2;
    cols = n / 4;
    q    = p - base;
    return base + (q % 4) * cols + q / 4;
  endfunction

  typedef struct packed {
    logic [HDR_W-1:0]     hdr;
    logic [PAYLOAD_W-1:0] payload;
  } gbt_frame_t;

  // Word of the receive FIFO: the decoded payload and how it was carried.
  typedef struct packed {
    logic                 fec_mode;     // 1: standard frame, payload[115:64] valid
    logic                 uncorrectable;
    logic [PAYLOAD_W-1:0] payload;
  } rx_word_t;

endpackage
