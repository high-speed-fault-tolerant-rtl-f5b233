// aes_key_expand: AES key schedule for 128-, 192- or 256-bit keys, four
// key words per clock, all round keys held in registers.
//
// The schedule is the FIPS-197 word recurrence over Nk = KEY_BITS/32 key
// words and Nr = Nk + 6 rounds: w[i] = w[i-Nk] ^ t, where t = w[i-1], except
// that t = SubWord(RotWord(w[i-1])) ^ Rcon[i/Nk] when i is a multiple of Nk
// and, for 256-bit keys only, t = SubWord(w[i-1]) when i mod Nk = 4.
// On key_load the key fills w[0..Nk-1] (first key word = key's top bits)
// and ready drops; each later clock builds the next four words, so the
// 4*(Nr+1) words are complete after ceil((4*(Nr+1) - Nk)/4) clocks and
// ready rises the clock after: 11 clocks after key_load for a 128-bit key,
// 13 for 192 and 14 for 256. Round key r is {w[4r], .., w[4r+3]}.
// The cipher reads the round keys in parallel, so a new key costs a short
// pause instead of a key path in every pipeline stage.
// AES-128 is the default because it is the key size the link was built and
// tested with; 192 and 256 bits are the other sizes of the standard (the
// cipher flow charts of the source are drawn for 256). Expanding once and
// storing the keys is this design's choice.
module aes_key_expand #(
  parameter int unsigned KEY_BITS = 128
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                key_load,
  input  logic [KEY_BITS-1:0] key,
  output logic [127:0]        rk [aes_pkg::aes_rounds(KEY_BITS)+1],
  output logic                ready
);
  import aes_pkg::*;

  localparam int unsigned NK = KEY_BITS / 32;
  localparam int unsigned NR = aes_rounds(KEY_BITS);
  localparam int unsigned NW = 4 * (NR + 1);

  initial assert (KEY_BITS == 128 || KEY_BITS == 192 || KEY_BITS == 256)
    else $error("aes_key_expand: KEY_BITS must be 128, 192 or 256");

  logic [31:0] w  [NW];
  logic [31:0] nw [4];
  logic [6:0]  idx;      // index of the next word to build; >= NW when done

  always_comb begin
    logic [31:0]  t;
    int unsigned  i;
    for (int k = 0; k < 4; k++) begin
      i = int'(idx) + k;
      t = (k == 0) ? w[(i - 1) % NW] : nw[k-1];
      if (i % NK == 0)
        t = sub_rot_word(t) ^ {rcon(i / NK), 24'h0};
      else if (NK > 6 && i % NK == 4)
        t = sub_word(t);
      nw[k] = w[(i - NK) % NW] ^ t;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      idx   <= 7'(NW);
      ready <= 1'b0;
      for (int i = 0; i < NW; i++) w[i] <= '0;
    end else if (key_load) begin
      for (int i = 0; i < NK; i++) w[i] <= key[KEY_BITS-1-32*i -: 32];
      idx   <= 7'(NK);
      ready <= 1'b0;
    end else if (int'(idx) < NW) begin
      for (int k = 0; k < 4; k++)
        if (int'(idx) + k < NW) w[int'(idx) + k] <= nw[k];
      idx   <= idx + 7'd4;
      ready <= (int'(idx) + 4 >= NW);
    end
  end

  for (genvar r = 0; r <= NR; r++) begin : g_rk
    assign rk[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
  end
endmodule
