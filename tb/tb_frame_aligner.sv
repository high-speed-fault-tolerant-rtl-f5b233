// tb_frame_aligner: a stream of 120-bit frames (headers 1010 and 0101,
// random payload) is cut into 40-bit words and then shifted by a channel
// offset of 0..119 bits, as a deserializer with an unknown word boundary
// would. For each offset the aligner must lock (after at most 120 bit
// slips plus 33 good headers), every aligned word must equal the sent word
// with the right index 0, 1, 2, and locked must not rise before the 32
// confirming headers. Finally four frames with a broken header must drop
// the lock and the aligner must lock again.
module tb_frame_aligner;
  logic clk = 0, rst = 1;
  logic [39:0] rx_word, al_word;
  logic [1:0]  al_word_idx;
  logic        al_valid, locked;
  logic [15:0] bitslips, lock_count;
  int checks = 0, failures = 0;

  frame_aligner dut (.clk, .rst, .rx_word, .al_word, .al_word_idx, .al_valid, .locked,
                     .bitslips, .lock_count);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s t=%0t", what, $time);
    end
  endtask

  // sent word stream (word n of frame n/3), and the line bit stream
  logic [39:0] sent [$];
  bit          line [$];
  int          frame_no;
  bit          bad_header;

  function automatic void new_frame();
    logic [119:0] f;
    f = {(frame_no % 3 == 0) ? 4'b0101 : 4'b1010, 116'({$urandom, $urandom, $urandom, $urandom})};
    if (bad_header) f[119:116] = 4'b1111;
    frame_no++;
    for (int w = 0; w < 3; w++) sent.push_back(f[119-40*w -: 40]);
    for (int b = 119; b >= 0; b--) line.push_back(f[b]);
  endfunction

  task automatic run_offset(input int offset, input int max_frames);
    int n, start_idx, locked_at, words_seen;
    int idx_sent;
    sent.delete(); line.delete();
    frame_no = 0; bad_header = 0;
    rst = 1;
    @(negedge clk);
    rst = 0;
    // drop 'offset' bits from the line: the deserializer starts mid-frame
    new_frame();
    for (int i = 0; i < offset; i++) void'(line.pop_front());
    idx_sent = 0;
    locked_at = -1;
    for (n = 0; n < max_frames * 3; n++) begin
      while (line.size() < 40) new_frame();
      for (int b = 0; b < 40; b++) rx_word[39-b] = line.pop_front();
      @(negedge clk);
      if (locked && locked_at < 0) locked_at = n;
    end
    check(locked, $sformatf("locked at offset %0d", offset));
    check(locked_at >= 33 * 3, $sformatf("not before 33 headers (%0d)", locked_at));
  endtask

  // after lock, aligned words must be the sent words in order
  int     match_ok, match_total;
  initial begin
    rx_word = '0;
    for (int k = 0; k < 12; k++) begin
      int off;
      off = (k == 0) ? 0 : (k == 1) ? 119 : (k == 2) ? 40 : (k == 3) ? 81 : $urandom_range(1, 118);
      run_offset(off, 300);
      // compare: find the aligned word in the sent stream
      match_ok = 0; match_total = 0;
      for (int n = 0; n < 30; n++) begin
        while (line.size() < 40) new_frame();
        for (int b = 0; b < 40; b++) rx_word[39-b] = line.pop_front();
        @(posedge clk); #1;
        if (al_valid) begin
          match_total++;
          for (int i = 0; i < sent.size(); i++)
            if (sent[i] == al_word && (i % 3) == al_word_idx) begin match_ok++; break; end
        end
        @(negedge clk);
      end
      check(match_total == 30 && match_ok == 30, $sformatf("aligned words offset %0d (%0d/%0d)",
            off, match_ok, match_total));
    end
    check(bitslips > 0, "bit slips happened");
    // lose lock with broken headers, then relock
    bad_header = 1;
    for (int n = 0; n < 5 * 3 * 3; n++) begin
      while (line.size() < 40) new_frame();
      for (int b = 0; b < 40; b++) rx_word[39-b] = line.pop_front();
      @(negedge clk);
    end
    check(!locked, "lock lost on broken headers");
    bad_header = 0;
    for (int n = 0; n < 300 * 3; n++) begin
      while (line.size() < 40) new_frame();
      for (int b = 0; b < 40; b++) rx_word[39-b] = line.pop_front();
      @(negedge clk);
    end
    check(locked && lock_count == 2, "relocked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
