// tb_gbt_scrambler: checks gbt_scrambler against a bit-serial model.
// The model runs each 13-bit lane one bit at a time through
// s[n] = d[n] ^ s[n-1] ^ s[n-3] ^ s[n-4] ^ s[n-13], starting from an
// all-ones history (the reset state), and the output word must match one
// clock after en. Words with en low must leave the output unchanged.
module tb_gbt_scrambler;
  localparam int LANES = 4, W = 13;
  logic clk = 0, rst = 1, en = 0;
  logic [LANES*W-1:0] d, q;
  int checks = 0, failures = 0;

  gbt_scrambler #(.LANES(LANES), .LANE_W(W)) dut (.clk, .rst, .en, .d, .q);

  always #5 clk = ~clk;

  // history per lane, hist[l][0] = most recent scrambled bit
  bit hist [LANES][13];
  logic [LANES*W-1:0] expected;

  task automatic model(input logic [LANES*W-1:0] din, output logic [LANES*W-1:0] sout);
    for (int l = 0; l < LANES; l++) begin
      for (int t = 0; t < W; t++) begin
        bit b;
        b = din[LANES*W-1-l*W-t] ^ hist[l][0] ^ hist[l][2] ^ hist[l][3] ^ hist[l][12];
        for (int k = 12; k > 0; k--) hist[l][k] = hist[l][k-1];
        hist[l][0] = b;
        sout[LANES*W-1-l*W-t] = b;
      end
    end
  endtask

  initial begin
    for (int l = 0; l < LANES; l++) for (int k = 0; k < 13; k++) hist[l][k] = 1;
    d = '0;
    expected = '1;   // reset state
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      d  = (n % 50 < 5) ? '0 : {$urandom, $urandom};   // include all-zero input runs
      if (en) model(d, expected);
      @(posedge clk); #1;
      checks++;
      if (q !== expected) begin
        failures++;
        if (failures < 5) $display("mismatch n=%0d q=%h exp=%h", n, q, expected);
      end
    end
    // all-zero input must not give an all-zero line (history is non-zero)
    checks++;
    if (q == '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
