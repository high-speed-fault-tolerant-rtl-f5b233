// tb_bch_decoder_bank: random standard frames, encoded here by long
// division, get 0, 1 or 2 wrong bits per codeword (up to 16 per frame)
// and must come out corrected, with the corrected-bit count right, one
// clock later. Three wrong bits in a codeword are beyond the code: the
// decoder must not claim a clean frame then (it either flags it or
// miscorrects, which shows as wrong data). Frames without FEC pass as is.
module tb_bch_decoder_bank;
  logic clk = 0, rst = 1, en = 0;
  logic [119:0] frame;
  logic         out_valid, fec_mode, uncorrectable;
  logic [3:0]   hdr;
  logic [115:0] payload;
  logic [4:0]   corrected;
  int checks = 0, failures = 0;

  bch_decoder_bank dut (.clk, .rst, .en, .frame, .out_valid, .fec_mode, .hdr,
                        .payload, .corrected, .uncorrectable);

  always #5 clk = ~clk;

  function automatic logic [7:0] parity(input logic [6:0] m);
    logic [14:0] r;
    r = {m, 8'h00};
    for (int i = 14; i >= 8; i--)
      if (r[i]) r = r ^ (15'b1_1101_0001 << (i - 8));
    return r[7:0];
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  logic [55:0]  msg;
  logic [63:0]  fec;
  logic [14:0]  cw [8];
  int nerr_total, p1, p2, p3, mode3;
  logic [51:0]  data;

  initial begin
    frame = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      data = {$urandom, $urandom};
      msg  = {4'b1010, data};
      nerr_total = 0;
      mode3 = (n % 10 == 9);
      for (int k = 0; k < 8; k++) begin
        int ne;
        cw[k] = {msg[55-7*k -: 7], parity(msg[55-7*k -: 7])};
        ne = (mode3 && k == 3) ? 3 : $urandom_range(0, 2);
        p1 = $urandom_range(0, 14);
        p2 = (p1 + $urandom_range(1, 13)) % 15;
        p3 = 3 * 15;
        for (int c = 0; c < 15; c++) if (c != p1 && c != p2) begin p3 = c; break; end
        if (ne >= 1) cw[k][p1] ^= 1'b1;
        if (ne >= 2) cw[k][p2] ^= 1'b1;
        if (ne >= 3) cw[k][p3] ^= 1'b1;
        // the header bits must stay 1010 for the frame to be taken as standard
        if (k == 0 && ne > 0 && (p1 >= 11 || (ne == 2 && p2 >= 11))) begin
          cw[k] = {msg[55 -: 7], parity(msg[55 -: 7])};
          ne = 0;
        end
        if (ne <= 2) nerr_total += ne;
      end
      fec = '0;
      for (int k = 0; k < 8; k++) begin
        frame[119-7*k -: 7] = cw[k][14:8];
        fec[63-8*k -: 8]    = cw[k][7:0];
      end
      frame[63:0] = fec;
      en = 1;
      @(posedge clk); #1;
      check(out_valid && fec_mode, "valid, standard");
      if (!mode3) begin
        check(payload[115:64] == data, $sformatf("corrected data n=%0d", n));
        check(hdr == 4'b1010, "header");
        check(payload[63:0] == '0, "wide field zero");
        check(corrected == 5'(nerr_total), $sformatf("count n=%0d %0d/%0d", n, corrected, nerr_total));
        check(!uncorrectable, "no flag");
      end else begin
        check(uncorrectable || payload[115:64] != data, "3 errors not reported clean");
      end
    end
    // frame without FEC
    @(negedge clk);
    frame = {4'b0101, 116'({$urandom, $urandom, $urandom, $urandom})};
    @(posedge clk); #1;
    check(!fec_mode && payload == frame[115:0] && corrected == 0, "no-FEC pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
