// tb_gbt_interleaver: checks the interleaver permutation.
// Hand-worked positions (p counts from the first bit sent): the header
// p = 0..3 stays; p = 4 <- 4, p = 5 <- 18, p = 7 <- 46, p = 8 <- 5 in half 0
// (4 rows of 14); p = 60 <- 60, p = 61 <- 75, p = 64 <- 61 in half 1 (4 rows
// of 15). Every output bit must come from exactly one input bit, and any 8
// consecutive line bits inside one half may hit a codeword at most twice
// (so a burst of 8 stays correctable). Frames without FEC pass unchanged.
module tb_gbt_interleaver;
  logic [119:0] din, dout;
  int checks = 0, failures = 0;

  gbt_interleaver dut (.din, .dout);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  // source position of line position p, found by pushing a single 1 through
  int src [120];
  int hits [8];

  // codeword of a pre-interleaving position (standard frame layout)
  function automatic int cw_of(input int q);
    return (q < 56) ? q / 7 : (q - 56) / 8;
  endfunction

  initial begin
    for (int q = 0; q < 120; q++) src[q] = -1;
    for (int q = 0; q < 120; q++) begin
      din = '0;
      din[119:116] = 4'b1010;
      if (q >= 4) din[119-q] = 1'b1;
      #1;
      for (int p = 4; p < 120; p++)
        if (dout[119-p]) begin
          check(src[p] == -1, "one source per bit");
          src[p] = q;
        end
      check(dout[119:116] == 4'b1010, "header kept");
    end
    for (int p = 0; p < 4; p++) src[p] = p;
    for (int p = 0; p < 120; p++) check(src[p] >= 0, "every bit has a source");
    check(src[4] == 4 && src[5] == 18 && src[7] == 46 && src[8] == 5, "half 0 positions");
    check(src[60] == 60 && src[61] == 75 && src[64] == 61, "half 1 positions");
    for (int start = 4; start + 8 <= 120; start++) begin
      if (start < 60 && start + 8 > 60) continue;
      for (int k = 0; k < 8; k++) hits[k] = 0;
      for (int p = start; p < start + 8; p++) hits[cw_of(src[p])]++;
      for (int k = 0; k < 8; k++) check(hits[k] <= 2, $sformatf("burst at %0d", start));
    end
    for (int n = 0; n < 20; n++) begin
      din = {4'b0101, 116'({$urandom, $urandom, $urandom, $urandom})};
      #1;
      check(dout == din, "no-FEC frame unchanged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
