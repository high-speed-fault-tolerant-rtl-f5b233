// bch_encoder_bank: builds the 120-bit frame from the scrambled data.
//
// Standard frame (fec_mode = 1): the 56-bit message {header 1010, 52
// scrambled slow-control and data bits} is cut into eight 7-bit pieces, piece
// k = msg[55-7k -: 7], and each goes through its own BCH(15,7,2) encoder in
// parallel. The frame is {message, parity 0, ..., parity 7}: header, slow
// control and data keep their places and the 64-bit FEC field carries the
// eight 8-bit parities, encoder 0 in FEC[63:56] and encoder 7 in FEC[7:0],
// as in the paper's standard frame format. Frame without FEC (fec_mode = 0):
// {header 0101, 52 data bits, 64 wide-data bits}, no encoding.
// The encoders are systematic, parity = m(x) x^8 mod g(x) (gbt_pkg).
//
// Timing: one register, so frame is valid one clock after en (the clock of
// latency the paper gives this block); frame_valid marks it.
module bch_encoder_bank (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         en,
  input  logic                         fec_mode,
  input  logic [gbt_pkg::DATA_W-1:0]   data,   // scrambled slow control + data
  input  logic [gbt_pkg::WIDE_W-1:0]   wide,   // scrambled extra data, no-FEC frames
  output logic [gbt_pkg::FRAME_W-1:0]  frame,
  output logic                         frame_valid
);
  import gbt_pkg::*;

  logic [MSG_W-1:0]             msg;
  logic [BCH_BLOCKS*BCH_P-1:0]  fec;

  assign msg = {HDR_FEC, data};

  // Eight encoders side by side.
  for (genvar k = 0; k < BCH_BLOCKS; k++) begin : g_enc
    assign fec[BCH_BLOCKS*BCH_P-1-k*BCH_P -: BCH_P] =
        bch_parity(msg[MSG_W-1-k*BCH_K -: BCH_K]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      frame       <= '0;
      frame_valid <= 1'b0;
    end else begin
      frame_valid <= en;
      if (en) frame <= fec_mode ? {msg, fec} : {HDR_NOFEC, data, wide};
    end
  end
endmodule
