// tb_aes_enc_pipe: FIPS-197 known answers through the pipelined cipher,
// back to back: (A) key 000102..0f, plain 00112233..ff -> 69c4e0d8
// 6a7b0430 d8cdb780 70b4c55a (Appendix C.1); (B) key 2b7e1516..., plain
// 3243f6a8 885a308d 313198a2 e0370734 -> 3925841d 02dc09fb dc118597
// 196a0b32 (Appendix B), with key schedules from aes_key_expand.
// Then AES-192 and AES-256 pipes: plain 00112233..ff with key 000102..17
// -> dda97ca4 864cdfe0 6eaf70a0 ec0d7191 (C.2) after 13 clocks, and with
// key 000102..1f -> 8ea2b7ca 516745bf eafc4990 4b496089 (C.3) after 15.
// One block per clock, each answer exactly 11 clocks after its input, and
// the sideband must travel with it.
module tb_aes_enc_pipe;
  logic clk = 0, rst = 1;
  logic [127:0] rk_a [11], rk_b [11], rk [11];
  logic ready_a, ready_b, load = 0, sel_b = 0;
  logic in_valid = 0, out_valid;
  logic [127:0] in_block, out_block;
  logic [7:0]   in_side, out_side;
  int checks = 0, failures = 0;
  logic [127:0] rk192 [13], rk256 [15];
  logic r192, r256, v192, v256, iv2 = 0;
  logic [127:0] o192, o256;
  logic [7:0]   s192, s256;
  aes_key_expand #(.KEY_BITS(192)) k192 (.clk, .rst, .key_load(load),
    .key(192'h000102030405060708090a0b0c0d0e0f1011121314151617), .rk(rk192), .ready(r192));
  aes_key_expand #(.KEY_BITS(256)) k256 (.clk, .rst, .key_load(load),
    .key(256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f), .rk(rk256), .ready(r256));
  aes_enc_pipe #(.KEY_BITS(192), .SIDE_W(8)) p192 (.clk, .rst, .rk(rk192), .in_valid(iv2),
    .in_block(128'h00112233445566778899aabbccddeeff), .in_side(8'h19), .out_valid(v192), .out_block(o192), .out_side(s192));
  aes_enc_pipe #(.KEY_BITS(256), .SIDE_W(8)) p256 (.clk, .rst, .rk(rk256), .in_valid(iv2),
    .in_block(128'h00112233445566778899aabbccddeeff), .in_side(8'h25), .out_valid(v256), .out_block(o256), .out_side(s256));

  aes_key_expand ka (.clk, .rst, .key_load(load), .key(128'h000102030405060708090a0b0c0d0e0f),
                        .rk(rk_a), .ready(ready_a));
  aes_key_expand kb (.clk, .rst, .key_load(load), .key(128'h2b7e151628aed2a6abf7158809cf4f3c),
                        .rk(rk_b), .ready(ready_b));
  always_comb for (int i = 0; i < 11; i++) rk[i] = sel_b ? rk_b[i] : rk_a[i];

  aes_enc_pipe #(.SIDE_W(8)) dut (.clk, .rst, .rk, .in_valid, .in_block, .in_side,
                                     .out_valid, .out_block, .out_side);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  int t_in;
  initial begin
    in_block = '0; in_side = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
    repeat (12) @(negedge clk);
    check(ready_a && ready_b, "keys ready");
    // key A: 4 identical blocks back to back, side = index
    for (int i = 0; i < 4; i++) begin
      in_valid = 1; in_block = 128'h00112233445566778899aabbccddeeff; in_side = 8'(i);
      if (i == 0) t_in = 0;
      @(negedge clk);
    end
    in_valid = 0;
    for (int c = 4; c < 30; c++) begin
      if (out_valid) begin
        check(out_block == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "C.1 cipher text");
        check(c == 11 + int'(out_side), $sformatf("latency: side %0d at clock %0d", out_side, c));
      end
      @(negedge clk);
    end
    // key B
    sel_b = 1;
    in_valid = 1; in_block = 128'h3243f6a8885a308d313198a2e0370734; in_side = 8'h5a;
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    check(out_valid && out_block == 128'h3925841d02dc09fbdc118597196a0b32 && out_side == 8'h5a,
          "Appendix B cipher text");
    check(r192 && r256, "AES-192/256 keys ready");
    iv2 = 1;
    @(negedge clk);
    iv2 = 0;
    for (int c = 1; c < 20; c++) begin
      if (v192) check(c == 13 && o192 == 128'hdda97ca4864cdfe06eaf70a0ec0d7191 && s192 == 8'h19,
                      $sformatf("C.2 AES-192 at clock %0d", c));
      if (v256) check(c == 15 && o256 == 128'h8ea2b7ca516745bfeafc49904b496089 && s256 == 8'h25,
                      $sformatf("C.3 AES-256 at clock %0d", c));
      @(negedge clk);
    end
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
