// tb_aes_key_expand: FIPS-197 Appendix A key schedules for all three key
// sizes, one aes_key_expand instance each.
//   A.1 (128): key 2b7e1516 28aed2a6 abf71588 09cf4f3c: round key 1 =
//       a0fafe17 88542cb1 23a33939 2a6c7605, round key 5 = d4d1c6f8 7c839d87
//       caf2b8bc 11f915bc, round key 10 = d014f9a8 c9ee2589 e13f0cc8
//       b6630ca6; a second key (all zero, round key 10 = b4ef5bcb 3e92e211
//       23e951cf 6f8f188e) follows.
//   A.2 (192): key 8e73b0f7 .. 522c6b7b: round key 1 = 62f8ead2 522c6b7b
//       fe0c91f7 2402f5a5, round key 12 = e98ba06f 448c773c 8ecc7204
//       01002202.
//   A.3 (256): key 603deb10 .. 0914dff4: round key 2 = 9ba35411 8e6925af
//       a51a8b5f 2067fcde, round key 14 = fe4890d1 e6188d0b 046df344
//       706c631e.
// ready must rise 11, 13 and 14 clocks after key_load (the clock of
// key_load counted as the first) and drop on a new key.
module tb_aes_key_expand;
  logic clk = 0, rst = 1, key_load = 0;
  logic [127:0] key;
  logic [127:0] rk   [11];
  logic [127:0] rk192 [13];
  logic [127:0] rk256 [15];
  logic ready, ready192, ready256;
  int checks = 0, failures = 0, cycles;
  int c192, c256;

  aes_key_expand dut (.clk, .rst, .key_load, .key, .rk, .ready);
  aes_key_expand #(.KEY_BITS(192)) dut192 (.clk, .rst, .key_load,
    .key(192'h8e73b0f7da0e6452c810f32b809079e562f8ead2522c6b7b), .rk(rk192), .ready(ready192));
  aes_key_expand #(.KEY_BITS(256)) dut256 (.clk, .rst, .key_load,
    .key(256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4), .rk(rk256), .ready(ready256));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    key = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk); key_load = 1;
    @(negedge clk); key_load = 0;
    cycles = 1;
    c192 = 0;
    c256 = 0;
    while (!ready256 && cycles < 50) begin
      if (ready && cycles == 11) check(1'b1, "ready at 11");
      @(negedge clk); cycles++;
      if (ready192 && c192 == 0) c192 = cycles;
    end
    c256 = cycles;
    check(c192 == 13, $sformatf("AES-192 ready after %0d clocks", c192));
    check(c256 == 14, $sformatf("AES-256 ready after %0d clocks", c256));
    check(rk[0]  == 128'h2b7e151628aed2a6abf7158809cf4f3c, "rk0");
    check(rk[1]  == 128'ha0fafe1788542cb123a339392a6c7605, "rk1");
    check(rk[5]  == 128'hd4d1c6f87c839d87caf2b8bc11f915bc, "rk5");
    check(rk[10] == 128'hd014f9a8c9ee2589e13f0cc8b6630ca6, "rk10");
    check(rk192[1]  == 128'h62f8ead2522c6b7bfe0c91f72402f5a5, "AES-192 rk1");
    check(rk192[12] == 128'he98ba06f448c773c8ecc720401002202, "AES-192 rk12");
    check(rk256[2]  == 128'h9ba354118e6925afa51a8b5f2067fcde, "AES-256 rk2");
    check(rk256[14] == 128'hfe4890d1e6188d0b046df344706c631e, "AES-256 rk14");
    key = '0;
    @(negedge clk); key_load = 1;
    @(negedge clk); key_load = 0;
    cycles = 1;
    check(!ready, "ready drops on a new key");
    while (!ready && cycles < 50) begin @(negedge clk); cycles++; end
    check(cycles == 11, $sformatf("AES-128 ready after %0d clocks", cycles));
    check(rk[10] == 128'hb4ef5bcb3e92e21123e951cf6f8f188e, "rk10 zero key");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
