// tb_tx_mux_cdc: 40 MHz frames in, 120 MHz words out (clock ratio 3:1).
// Every frame must come out as three words in order (header word first,
// word_idx 0, 1, 2) with no gap once the reader runs: the word rate equals
// the frame rate times three (4.8 Gb/s both sides). A pause of the writer
// (and the end of the stream) must each show as one counted underflow with zero words on the line, and
// frames written after it must still come out intact.
module tb_tx_mux_cdc;
  logic clk40 = 0, clk120 = 0, rst40 = 1, rst120 = 1;
  logic         wr_en = 0;
  logic [119:0] wr_frame;
  logic [39:0]  tx_word;
  logic [1:0]   word_idx;
  logic         tx_valid;
  logic [15:0]  underflows;
  int checks = 0, failures = 0;

  tx_mux_cdc dut (.clk_wr(clk40), .rst_wr(rst40), .wr_en, .wr_frame,
                  .clk_rd(clk120), .rst_rd(rst120), .tx_word, .word_idx, .tx_valid, .underflows);

  // 120 MHz and 40 MHz from one source, rising edges aligned
  always #4 clk120 = ~clk120;
  initial forever begin
    #4 clk40 = 1; #12 clk40 = 0; #8;
  end

  logic [39:0] exp_words [$];
  int valid_words, zero_words;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s t=%0t", what, $time);
    end
  endtask

  // writer: 200 frames, a pause of 5 frame times, then 100 more
  initial begin
    wr_frame = '0;
    #50;
    @(negedge clk40); rst40 = 0;
    for (int n = 0; n < 305; n++) begin
      @(negedge clk40);
      if (n >= 200 && n < 205) begin
        wr_en = 0;
      end else begin
        wr_en = 1;
        wr_frame = {4'b1010, 116'({$urandom, $urandom, $urandom, $urandom})};
        exp_words.push_back(wr_frame[119:80]);
        exp_words.push_back(wr_frame[79:40]);
        exp_words.push_back(wr_frame[39:0]);
      end
    end
    @(negedge clk40); wr_en = 0;
    repeat (20) @(posedge clk40);
    check(exp_words.size() == 0, "all words sent");
    // one underflow at the pause and one when the stream ends
    check(underflows == 16'd2, "underflows only at the pause and the end");
    check(zero_words >= 3, "zero words during the pause");
    $display("words=%0d underflows=%0d", valid_words, underflows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader-side scoreboard
  initial begin
    #50;
    @(negedge clk120); rst120 = 0;
    forever begin
      @(posedge clk120); #1;
      if (tx_valid) begin
        logic [39:0] e;
        valid_words++;
        e = exp_words.pop_front();
        check(tx_word == e, "word order and content");
        check(word_idx == 2'((valid_words - 1) % 3), "word index");
      end else if (underflows != 0) begin
        check(tx_word == '0, "zero on underflow");
        zero_words++;
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
