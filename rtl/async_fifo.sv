// async_fifo: asynchronous FIFO between the receiver and the PCIe/DMA side.
//
// Receiver data is written with the receiver clock and read by the DMA
// engine with the 125 MHz PCIe clock. A RAM of DEPTH words sits between two
// binary pointers; each pointer also exists as a Gray code that crosses to
// the other clock through two flip-flops, so full (write side) and empty
// (read side) are safe, if pessimistic by up to two clocks. A write while
// full is dropped and counted in overflows. Signals Wr_En, Data, Full,
// Wr_Clk, Rd_Clk, Empty, Rd_En follow the paper's PCIe figure; depth,
// width and the drop rule are this design's choices.
//
// Timing: rd_data is registered and valid the clock after rd_en with
// empty low (standard, not first-word-fall-through).
module async_fifo #(
  parameter int unsigned WIDTH = 118,
  parameter int unsigned DEPTH = 512    // power of 2
) (
  input  logic             wr_clk,
  input  logic             wr_rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  output logic [15:0]      overflows,
  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wp, wp_gray, rp, rp_gray;
  logic [AW:0] rp_gray_s1, rp_gray_s2, wp_gray_s1, wp_gray_s2;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write side
  assign full = (wp_gray == {~rp_gray_s2[AW:AW-1], rp_gray_s2[AW-2:0]});

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wp         <= '0;
      wp_gray    <= '0;
      rp_gray_s1 <= '0;
      rp_gray_s2 <= '0;
      overflows  <= '0;
    end else begin
      rp_gray_s1 <= rp_gray;
      rp_gray_s2 <= rp_gray_s1;
      if (wr_en) begin
        if (!full) begin
          mem[wp[AW-1:0]] <= wr_data;
          wp      <= wp + 1'b1;
          wp_gray <= bin2gray(wp + 1'b1);
        end else begin
          overflows <= overflows + 16'd1;
        end
      end
    end
  end

  // ---- read side
  assign empty = (rp_gray == wp_gray_s2);

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rp         <= '0;
      rp_gray    <= '0;
      wp_gray_s1 <= '0;
      wp_gray_s2 <= '0;
      rd_data    <= '0;
    end else begin
      wp_gray_s1 <= wp_gray;
      wp_gray_s2 <= wp_gray_s1;
      if (rd_en && !empty) begin
        rd_data <= mem[rp[AW-1:0]];
        rp      <= rp + 1'b1;
        rp_gray <= bin2gray(rp + 1'b1);
      end
    end
  end

  initial assert (DEPTH >= 4 && (1 << AW) == DEPTH) else $error("DEPTH must be a power of 2");
endmodule
