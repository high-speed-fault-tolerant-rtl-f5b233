// tb_gbt_link_top: the whole link, sender to PCIe FIFO, at default sizes.
//
// The sender's 40-bit words go through a channel model standing in for
// serializer, fibre and deserializer: the receiver sees the same bit stream
// delayed by a fixed number of bits (so its word boundary falls inside a
// frame) with bit errors added on request. A DMA model reads the FIFO at
// 125 MHz. Schedule, in frames of detector data (one per 40 MHz clock):
//      0- 399  standard frames, clean line      -> bit slips, lock
//    400- 599  one wrong bit in every frame's middle word (rows 430-569)
//    600- 749  an 8-bit burst in every frame's last word (rows 630-719)
//    750- 949  frames without FEC (mode switch), wide data used
//    950-1099  standard frames again
//   1100-1799  DMA stops reading                 -> FIFO full, overflow
// Every word read from the FIFO must equal the data sent, in order, from
// the second frame the receiver delivers (the descrambler needs one frame
// to fall in step). The receiver's cipher counter is set once, from the
// counter the sender used for the first frame the receiver gets. Each
// mechanism (bit slip, lock, single-bit correction, burst correction, mode
// switch to frames without FEC and back, FIFO overflow) is counted and must
// happen; the receiver must deliver one frame per 40 MHz clock.
module tb_gbt_link_top;
  import gbt_pkg::*;

  localparam int OFFSET_BITS = 23;   // channel delay inside a 40-bit word

  logic clk40 = 0, clk120 = 0, pcie_clk = 0;
  logic rst40 = 1, rst120 = 1, pcie_rst = 1;

  always #4 clk120 = ~clk120;
  initial forever begin
    #4 clk40 = 1; #12 clk40 = 0; #8;
  end
  initial begin
    #1.3;
    forever #4 pcie_clk = ~pcie_clk;
  end

  logic         tx_data_valid = 0, tx_fec_mode = 1;
  logic [3:0]   tx_sc;
  logic [47:0]  tx_data;
  logic [63:0]  tx_wide;
  logic         key_load = 0, crypt_en = 1;
  logic [127:0] key = 128'h000102030405060708090a0b0c0d0e0f;
  logic [63:0]  nonce = 64'hfeedfacecafebeef;
  logic         tx_key_ready, rx_key_ready;
  logic [39:0]  tx_word, rx_word;
  logic [1:0]   tx_word_idx;
  logic         tx_word_valid;
  logic [15:0]  tx_underflows;
  logic [63:0]  tx_ctr, rx_ctr;
  logic         rx_ctr_load = 0;
  logic [63:0]  rx_ctr_value = '0;
  logic [3:0]   rx_header;
  logic         rx_locked;
  logic [15:0]  rx_bitslips, rx_lock_count;
  logic [31:0]  rx_frames, rx_corrected_bits, rx_uncorrectable;
  logic         fifo_rd_en = 0, fifo_empty, fifo_full;
  rx_word_t     fifo_rd_data;
  logic [15:0]  fifo_overflows;

  gbt_link_top dut (
    .tx_clk40(clk40), .tx_rst40(rst40), .tx_clk120(clk120), .tx_rst120(rst120),
    .tx_data_valid, .tx_fec_mode, .tx_sc, .tx_data, .tx_wide,
    .tx_key_load(key_load), .tx_key(key), .tx_nonce(nonce), .tx_crypt_en(crypt_en),
    .tx_key_ready, .tx_word, .tx_word_idx, .tx_word_valid, .tx_ctr, .tx_underflows,
    .rx_clk120(clk120), .rx_rst120(rst120), .rx_clk40(clk40), .rx_rst40(rst40),
    .rx_word, .rx_key_load(key_load), .rx_key(key), .rx_nonce(nonce), .rx_crypt_en(crypt_en),
    .rx_ctr_load, .rx_ctr_value, .rx_key_ready, .rx_ctr, .rx_header, .rx_locked,
    .rx_bitslips, .rx_lock_count, .rx_frames, .rx_corrected_bits, .rx_uncorrectable,
    .pcie_clk, .pcie_rst, .fifo_rd_en, .fifo_rd_data, .fifo_empty, .fifo_full, .fifo_overflows
  );

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s t=%0t", what, $time);
    end
  endtask

  // ------------------------------------------------------------ channel
  int   frame_n = 0;          // detector frames sent so far
  bit   inj_single = 0, inj_burst = 0;
  int   n_single = 0, n_burst = 0;
  logic [39:0] line_prev = '0, line_cur;

  always_comb begin
    line_cur = tx_word;
    if (inj_single && tx_word_idx == 2'd1) line_cur[$urandom_range(0, 39)] ^= 1'b1;
    if (inj_burst  && tx_word_idx == 2'd2) line_cur[20:13] = ~line_cur[20:13];
  end

  always @(posedge clk120) begin
    logic [79:0] both;
    if (inj_single && tx_word_idx == 2'd1 && tx_word_valid) n_single++;
    if (inj_burst  && tx_word_idx == 2'd2 && tx_word_valid) n_burst++;
    both      = {line_prev, line_cur};
    rx_word  <= both[OFFSET_BITS +: 40];
    line_prev <= line_cur;
  end

  // ---------------------------------------------- cipher counter hand-over
  logic [63:0] ctr_of [logic [119:0]];
  always @(posedge clk40)
    if (dut.enc_out_valid) ctr_of[dut.enc_out_frame] = dut.tx_ctr;

  bit ctr_synced = 0;
  always @(negedge clk40) begin
    rx_ctr_load <= 1'b0;
    if (!ctr_synced && dut.dmx_valid) begin
      ctr_synced = 1;
      check(ctr_of.exists(dut.dmx_frame), "first received frame was sent");
      if (ctr_of.exists(dut.dmx_frame)) begin
        rx_ctr_load  <= 1'b1;
        rx_ctr_value <= ctr_of[dut.dmx_frame];
      end
    end
  end

  // ------------------------------------------------------------ source
  typedef struct { bit fec; logic [3:0] sc; logic [47:0] data; logic [63:0] wide; } item_t;
  item_t exp_q [$];
  bit dma_on = 1;
  bit locked_while_sending = 0;
  int nofec_sent = 0;

  initial begin
    tx_sc = '0; tx_data = '0; tx_wide = '0;
    #40;
    @(negedge clk40); rst40 = 0; rst120 = 0; pcie_rst = 0;
    @(negedge clk40); key_load = 1;
    @(negedge clk40); key_load = 0;
    repeat (12) @(negedge clk40);
    check(tx_key_ready && rx_key_ready, "keys ready");
    for (frame_n = 0; frame_n < 1800; frame_n++) begin
      item_t it;
      tx_data_valid = 1;
      tx_fec_mode   = !(frame_n >= 750 && frame_n < 950);
      tx_sc   = 4'($urandom);
      tx_data = {16'($urandom), $urandom};
      tx_wide = {$urandom, $urandom};
      inj_single = (frame_n >= 430 && frame_n < 570);
      inj_burst  = (frame_n >= 630 && frame_n < 720);
      dma_on     = (frame_n < 1100);
      it.fec = tx_fec_mode; it.sc = tx_sc; it.data = tx_data; it.wide = tx_fec_mode ? '0 : tx_wide;
      if (!tx_fec_mode) nofec_sent++;
      exp_q.push_back(it);
      @(negedge clk40);
    end
    locked_while_sending = rx_locked;
    tx_data_valid = 0;
    repeat (50) @(negedge clk40);
    finish_checks();
  end

  // ------------------------------------------------------------ DMA model
  int  n_rx = 0, n_cmp = 0, n_nofec_rx = 0, n_fec_after = 0;
  bit  pend = 0, synced = 0;
  always @(negedge pcie_clk) begin
    if (pend) begin
      n_rx++;
      compare(fifo_rd_data);
    end
    fifo_rd_en <= dma_on;
    pend = dma_on && !fifo_empty;
  end

  function automatic bit same(input rx_word_t w, input item_t it);
    return w.fec_mode == it.fec && w.payload == {it.sc, it.data, it.wide};
  endfunction

  task automatic compare(input rx_word_t w);
    if (n_rx == 1) return;        // descrambler falls in step on this one
    if (!synced) begin
      int i;
      for (i = 0; i < exp_q.size(); i++) if (same(w, exp_q[i])) break;
      check(i < exp_q.size(), "second received frame found among those sent");
      if (i >= exp_q.size()) return;
      repeat (i) void'(exp_q.pop_front());
      synced = 1;
    end
    n_cmp++;
    if (!w.fec_mode) n_nofec_rx++;
    else if (n_nofec_rx > 0) n_fec_after++;
    check(!w.uncorrectable, "no uncorrectable frame");
    check(exp_q.size() > 0 && same(w, exp_q[0]), $sformatf("frame %0d delivered intact", n_cmp));
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  endtask

  // --------------------------------------------------- rate measurement
  int rate_frames = -1;
  initial begin
    int f0;
    wait (frame_n == 300);
    @(posedge clk40); #1;
    f0 = int'(rx_frames);
    repeat (100) @(posedge clk40);
    #1;
    rate_frames = int'(rx_frames) - f0;
  end

  task automatic finish_checks();
    $display("bitslips=%0d locks=%0d frames=%0d corrected=%0d single=%0d burst=%0d nofec=%0d overflows=%0d compared=%0d",
             rx_bitslips, rx_lock_count, rx_frames, rx_corrected_bits, n_single, n_burst,
             n_nofec_rx, fifo_overflows, n_cmp);
    check(rx_bitslips > 0,           "mechanism: bit slip");
    check(rx_lock_count == 1 && locked_while_sending, "mechanism: lock, kept to the end of the data");
    check(n_single > 100,            "mechanism: single-bit errors injected");
    check(n_burst > 50,              "mechanism: burst errors injected");
    check(rx_corrected_bits >= 32'(n_single + 8 * n_burst - 20), "mechanism: errors corrected");
    check(rx_uncorrectable == 0,     "no uncorrectable frame");
    check(n_nofec_rx >= 190,         "mechanism: frames without FEC delivered");
    check(n_fec_after >= 100,        "mechanism: back to standard frames");
    check(fifo_overflows > 0 && fifo_full, "mechanism: FIFO overflow when the DMA stalls");
    check(rate_frames == 100,        $sformatf("one frame per 40 MHz clock (%0d/100)", rate_frames));
    check(tx_underflows == 1,        "sender MUX underflows only when the source stops");
    check(n_cmp >= 800,              "enough frames compared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
