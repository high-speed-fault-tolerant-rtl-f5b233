// tb_gbt_deinterleaver: interleaves random standard frames with the rule
// written out here (header fixed; then per half, line position q holds
// frame position (q mod 4) * cols + q / 4, cols = 14 or 15) and checks that
// gbt_deinterleaver restores the frame. Frames without FEC pass unchanged.
module tb_gbt_deinterleaver;
  logic [119:0] din, dout, orig;
  int checks = 0, failures = 0;

  gbt_deinterleaver dut (.din, .dout);

  function automatic logic [119:0] interleave(input logic [119:0] f);
    logic [119:0] r;
    r = f;
    for (int q = 0; q < 56; q++) r[119-(4+q)]  = f[119-(4 + (q % 4) * 14 + q / 4)];
    for (int q = 0; q < 60; q++) r[119-(60+q)] = f[119-(60 + (q % 4) * 15 + q / 4)];
    return r;
  endfunction

  initial begin
    for (int n = 0; n < 200; n++) begin
      orig = {4'b1010, 116'({$urandom, $urandom, $urandom, $urandom})};
      din  = interleave(orig);
      #1;
      checks++;
      if (dout !== orig) begin
        failures++;
        if (failures < 5) $display("FAIL %h -> %h", orig, dout);
      end
    end
    for (int n = 0; n < 20; n++) begin
      din = {4'b0101, 116'({$urandom, $urandom, $urandom, $urandom})};
      #1;
      checks++;
      if (dout !== din) failures++;
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
