// tb_rx_demux_cdc: 120 MHz words with their index in, 40 MHz frames out.
// Frames sent as words 0, 1, 2 must come out whole and in order, one per
// 40 MHz clock in steady state; a frame cut short (word 2 missing) must be
// dropped without disturbing the next one.
module tb_rx_demux_cdc;
  logic clk40 = 0, clk120 = 0, rst40 = 1, rst120 = 1;
  logic         wr_en = 0;
  logic [1:0]   wr_word_idx;
  logic [39:0]  wr_word;
  logic [119:0] rd_frame;
  logic         rd_valid;
  int checks = 0, failures = 0;

  rx_demux_cdc dut (.clk_wr(clk120), .rst_wr(rst120), .wr_en, .wr_word_idx, .wr_word,
                    .clk_rd(clk40), .rst_rd(rst40), .rd_frame, .rd_valid);

  always #4 clk120 = ~clk120;
  initial forever begin
    #4 clk40 = 1; #12 clk40 = 0; #8;
  end

  logic [119:0] exp_frames [$];
  int got, consecutive, max_consecutive;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s t=%0t", what, $time);
    end
  endtask

  initial begin
    logic [119:0] f;
    wr_word = '0; wr_word_idx = '0;
    #50;
    @(negedge clk120); rst120 = 0;
    for (int n = 0; n < 200; n++) begin
      f = {4'b0101, 116'({$urandom, $urandom, $urandom, $urandom})};
      for (int w = 0; w < 3; w++) begin
        @(negedge clk120);
        // frame 100 is cut: its word 2 is not valid
        wr_en = !(n == 100 && w == 2);
        wr_word_idx = 2'(w);
        wr_word = f[119-40*w -: 40];
      end
      if (n != 100) exp_frames.push_back(f);
    end
    @(negedge clk120); wr_en = 0;
    repeat (10) @(posedge clk40);
    check(exp_frames.size() == 0, "all frames out");
    check(got == 199, "frame count");
    check(max_consecutive >= 90, "one frame per 40 MHz clock in steady state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50;
    @(negedge clk40); rst40 = 0;
    forever begin
      @(posedge clk40); #1;
      if (rd_valid) begin
        got++;
        consecutive++;
        if (consecutive > max_consecutive) max_consecutive = consecutive;
        check(exp_frames.size() > 0 && rd_frame == exp_frames.pop_front(), "frame content and order");
      end else begin
        consecutive = 0;
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
