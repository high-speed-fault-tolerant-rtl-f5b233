// tb_async_fifo: writer at 40 MHz, reader at 125 MHz (the PCIe clock),
// random enables on both sides. Every word read must be the next word
// written (scoreboard), full must rise when the reader stops and the
// writer keeps going, writes while full must be counted as overflows and
// lost, and empty must rise once everything is read.
module tb_async_fifo;
  localparam int WIDTH = 118, DEPTH = 16;
  logic wr_clk = 0, rd_clk = 0, wr_rst = 1, rd_rst = 1;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [WIDTH-1:0] wr_data, rd_data;
  logic [15:0] overflows;
  int checks = 0, failures = 0;

  async_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.wr_clk, .wr_rst, .wr_en, .wr_data, .full,
    .overflows, .rd_clk, .rd_rst, .rd_en, .rd_data, .empty);

  always #12.5 wr_clk = ~wr_clk;
  always #4 rd_clk = ~rd_clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s t=%0t", what, $time);
    end
  endtask

  logic [WIDTH-1:0] q [$];
  bit reader_on = 1;
  int dropped = 0, written = 0, readn = 0, full_seen = 0;

  initial begin
    wr_data = '0;
    #100;
    @(negedge wr_clk); wr_rst = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge wr_clk);
      if (n == 200) reader_on = 0;
      if (n == 300) reader_on = 1;
      wr_en   = ($urandom_range(0, 3) != 0);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      if (wr_en) begin
        if (full) begin
          dropped++;
          full_seen++;
        end else begin
          q.push_back(wr_data);
          written++;
        end
      end
    end
    @(negedge wr_clk); wr_en = 0;
    repeat (40) @(negedge wr_clk);
    check(full_seen > 0, "full seen");
    check(int'(overflows) == dropped, "overflow count");
    check(q.size() == 0 && readn == written, "all written words read");
    check(empty, "empty at the end");
    $display("written=%0d read=%0d dropped=%0d", written, readn, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit pend = 0;
  initial begin
    #100;
    @(negedge rd_clk); rd_rst = 0;
    forever begin
      @(negedge rd_clk);
      if (pend) begin
        check(q.size() > 0 && rd_data == q.pop_front(), "read order and data");
        readn++;
      end
      rd_en = reader_on && ($urandom_range(0, 1) == 1);
      pend  = rd_en && !empty;
    end
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
