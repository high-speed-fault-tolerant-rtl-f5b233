// tb_bch_encoder_bank: checks the frame built by bch_encoder_bank.
// Standard frames: header 1010 on top, the 52 data bits unchanged below it,
// and for each of the eight codewords {message k, parity k} a polynomial
// that the generator x^8+x^7+x^6+x^4+1 divides exactly (long division done
// here bit by bit, from the top). One known codeword is checked by value:
// message 0000001 has parity equal to g(x) - x^8 = 1101_0001. Frames
// without FEC: header 0101 then the 116 data bits. The frame must appear
// one clock after en.
module tb_bch_encoder_bank;
  logic clk = 0, rst = 1, en = 0, fec_mode = 1;
  logic [51:0]  data;
  logic [63:0]  wide;
  logic [119:0] frame;
  logic         frame_valid;
  int checks = 0, failures = 0;

  bch_encoder_bank dut (.clk, .rst, .en, .fec_mode, .data, .wide, .frame, .frame_valid);

  always #5 clk = ~clk;

  function automatic bit divisible(input logic [14:0] c);
    logic [14:0] r;
    r = c;
    for (int i = 14; i >= 8; i--)
      if (r[i]) r = r ^ (15'b1_1101_0001 << (i - 8));
    return r == 0;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  logic [55:0] msg;
  initial begin
    data = '0; wide = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    // known codeword: data such that message 7 = 0000001 and all others 0
    @(negedge clk);
    en = 1; fec_mode = 1; data = 52'd1;
    @(posedge clk); #1;
    check(frame_valid, "valid after one clock");
    check(frame[7:0] == 8'b1101_0001, "parity of 0000001");
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      en = 1;
      fec_mode = (n % 4 != 3);
      data = {$urandom, $urandom};
      wide = {$urandom, $urandom};
      @(posedge clk); #1;
      check(frame_valid, "valid");
      if (fec_mode) begin
        msg = {4'b1010, data};
        check(frame[119:116] == 4'b1010, "header 1010");
        check(frame[115:64] == data, "data in place");
        for (int k = 0; k < 8; k++)
          check(divisible({msg[55-7*k -: 7], frame[63-8*k -: 8]}), $sformatf("codeword %0d", k));
      end else begin
        check(frame == {4'b0101, data, wide}, "frame without FEC");
      end
    end
    @(negedge clk); en = 0;
    @(posedge clk); #1;
    check(!frame_valid, "valid low");
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
