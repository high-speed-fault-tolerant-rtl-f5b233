// tb_aes_ctr_crypt: frame cipher in counter mode.
// Known answer: with key 000102..0f, nonce 0011223344556677 and counter
// 8899aabbccddeeff the counter block is the FIPS-197 C.1 plain text, so the
// key stream is 69c4e0d8 6a7b0430 d8cdb780 70b4c55a and a frame f must leave
// as {f[119:116], f[115:0] ^ keystream[127:12]}, 11 clocks later. Then a
// second instance with the same key, loaded with the same counter, must
// turn a stream of cipher frames back into the plain frames (one per
// clock), the header must stay in clear, and with crypt_en low frames pass
// unchanged.
module tb_aes_ctr_crypt;
  logic clk = 0, rst = 1, key_load = 0;
  logic [127:0] key = 128'h000102030405060708090a0b0c0d0e0f;
  logic [63:0]  nonce = 64'h0011223344556677;
  logic         crypt_en = 1, ctr_load = 0;
  logic [63:0]  ctr_value = 64'h8899aabbccddeeff;
  logic         in_valid = 0, out_valid, key_ready, d_valid, d_ready;
  logic [119:0] in_frame, out_frame, d_frame;
  logic [63:0]  out_ctr, d_ctr;
  logic         d_load = 0;
  int checks = 0, failures = 0;

  aes_ctr_crypt enc (.clk, .rst, .key_load, .key, .nonce, .crypt_en, .ctr_load, .ctr_value,
                     .in_valid, .in_frame, .out_valid, .out_frame, .out_ctr, .key_ready);
  aes_ctr_crypt dec (.clk, .rst, .key_load, .key, .nonce, .crypt_en, .ctr_load(d_load),
                     .ctr_value, .in_valid(out_valid), .in_frame(out_frame),
                     .out_valid(d_valid), .out_frame(d_frame), .out_ctr(d_ctr), .key_ready(d_ready));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s t=%0t", what, $time);
    end
  endtask

  logic [119:0] sent [$];
  logic [119:0] f0;
  int cnt;
  event start_ev;
  int dn = 0;

  initial begin
    in_frame = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk); key_load = 1;
    @(negedge clk); key_load = 0;
    repeat (12) @(negedge clk);
    check(key_ready && d_ready, "key ready");
    // known answer frame, counter loaded
    f0 = {4'b1010, 116'h0123456789abcdef0123456789a};
    in_valid = 1; in_frame = f0; ctr_load = 1;
    @(negedge clk);
    ctr_load = 0; in_valid = 0;
    cnt = 1;
    while (!out_valid && cnt < 40) begin @(negedge clk); cnt++; end
    check(cnt == 11, $sformatf("latency %0d", cnt));
    check(out_frame == {4'b1010, f0[115:0] ^ 116'(128'h69c4e0d86a7b0430d8cdb78070b4c55a >> 12)},
          "known key stream");
    check(out_ctr == 64'h8899aabbccddeeff, "counter of the frame");
    // decryptor: load the same counter on the first cipher frame
    @(negedge clk);
    ctr_load = 1;                        // encryptor restarts at ctr_value
    in_valid = 1;
    -> start_ev;
    for (int n = 0; n < 100; n++) begin
      in_frame = {(n % 2) ? 4'b0101 : 4'b1010, 116'({$urandom, $urandom, $urandom, $urandom})};
      sent.push_back(in_frame);
      @(negedge clk);
      ctr_load = 0;
    end
    in_valid = 0;
    repeat (40) @(negedge clk);
    check(sent.size() == 0, "all frames back");
    // pass-through
    crypt_en = 0;
    in_valid = 1; in_frame = {4'b1010, 116'h5};
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    check(out_valid && out_frame == {4'b1010, 116'h5}, "crypt_en low passes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the decryptor sees the first cipher frame 11 clocks after the encryptor
  // got it; load its counter then
  initial begin
    @(start_ev);
    repeat (11) @(negedge clk);
    d_load = 1;
    @(negedge clk);
    d_load = 0;
  end

  always @(posedge clk) begin
    #1;
    if (d_valid && crypt_en && d_ctr >= ctr_value) begin
      logic [119:0] e;
      e = sent.pop_front();
      check(d_frame == e, "decrypted frame");
      check(d_ctr == ctr_value + 64'(dn), "decryptor counter");
      dn++;
    end
    if (out_valid && crypt_en && sent.size() > 0)
      check(out_frame[119:116] inside {4'b1010, 4'b0101}, "header in clear");
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
