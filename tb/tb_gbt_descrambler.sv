// tb_gbt_descrambler: feeds gbt_descrambler with words scrambled by a
// bit-serial model and checks that the data comes back one clock later.
// Then a single wrong bit is injected on the line: the damage must stay
// within two output words and at most 5 bits, after which the output is
// correct again (self-synchronisation).
module tb_gbt_descrambler;
  localparam int LANES = 4, W = 13, TW = LANES * W;
  logic clk = 0, rst = 1, en = 0;
  logic [TW-1:0] s, d;
  int checks = 0, failures = 0;

  gbt_descrambler #(.LANES(LANES), .LANE_W(W)) dut (.clk, .rst, .en, .s, .d);

  always #5 clk = ~clk;

  bit hist [LANES][13];

  function automatic logic [TW-1:0] scramble(input logic [TW-1:0] din);
    logic [TW-1:0] sout;
    for (int l = 0; l < LANES; l++)
      for (int t = 0; t < W; t++) begin
        bit b;
        b = din[TW-1-l*W-t] ^ hist[l][0] ^ hist[l][2] ^ hist[l][3] ^ hist[l][12];
        for (int k = 12; k > 0; k--) hist[l][k] = hist[l][k-1];
        hist[l][0] = b;
        sout[TW-1-l*W-t] = b;
      end
    return sout;
  endfunction

  logic [TW-1:0] data, errmask;
  int bad_bits, bad_words;

  initial begin
    // random starting history: the descrambler must catch up by itself
    for (int l = 0; l < LANES; l++) for (int k = 0; k < 13; k++) hist[l][k] = 1'($urandom);
    s = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    bad_bits = 0; bad_words = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      data    = {$urandom, $urandom};
      errmask = (n == 150) ? (TW'(1) << $urandom_range(0, TW-1)) : '0;
      s  = scramble(data) ^ errmask;
      en = 1;
      @(posedge clk); #1;
      if (n >= 1 && (n < 150 || n > 151)) begin
        checks++;
        if (d !== data) begin
          failures++;
          if (failures < 5) $display("mismatch n=%0d d=%h exp=%h", n, d, data);
        end
      end else if (n >= 150) begin
        bad_bits += $countones(d ^ data);
        if (d !== data) bad_words++;
      end
    end
    checks++;
    if (bad_bits == 0 || bad_bits > 5) begin
      failures++;
      $display("error spread %0d bits", bad_bits);
    end
    // hold while en low
    @(negedge clk); en = 0; s = ~s; data = d;
    @(posedge clk); #1;
    checks++;
    if (d !== data) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
