// bch15_7_decoder: combinational decoder for one BCH(15,7,2) codeword.
//
// Three steps as in the paper: (1) syndromes S1 = r(alpha), S3 = r(alpha^3)
// over GF(16) and the error locator x^2 + S1 x + sigma2 with
// sigma2 = (S3 + S1^3) / S1; (2) a Chien search that tries all 15 positions
// at once (position j is in error when alpha^2j + S1 alpha^j + sigma2 = 0);
// (3) the bits found are flipped. No error: S1 = S3 = 0. One error: sigma2 = 0
// and the single root is S1. A pattern the code cannot place (S1 = 0 with
// S3 /= 0, or a root count that does not match the locator degree) raises
// uncorrectable and the received message is passed on unchanged.
// The syndrome/Chien structure is the paper's; the fully parallel search and
// the flag are this design's choices.
//
// The whole codeword is corrected but only its message bits leave the
// module, so the low 8 bits of the corrected word are unused on purpose.
//
// Interface: cw = {message[6:0], parity[7:0]}, bit j = coefficient of x^j.
module bch15_7_decoder (
  input  logic [gbt_pkg::BCH_N-1:0] cw,
  output logic [gbt_pkg::BCH_K-1:0] msg,
  output logic [1:0]                nerr,
  output logic                      uncorrectable
);
  import gbt_pkg::*;

  logic [3:0]       s1, s3, sigma2;
  logic [BCH_N-1:0] err_loc;
  logic [1:0]       roots;
  logic [BCH_N-1:0] fixed;

  always_comb begin
    s1 = '0;
    s3 = '0;
    for (int j = 0; j < BCH_N; j++) begin
      if (cw[j]) begin
        s1 ^= gf16_alpha(j);
        s3 ^= gf16_alpha(3*j);
      end
    end
    sigma2 = gf16_mul(s3 ^ gf16_mul(s1, gf16_mul(s1, s1)), gf16_inv(s1));

    err_loc = '0;
    roots   = '0;
    if (s1 != 4'd0) begin
      for (int j = 0; j < BCH_N; j++) begin
        if ((gf16_alpha(2*j) ^ gf16_mul(s1, gf16_alpha(j)) ^ sigma2) == 4'd0) begin
          err_loc[j] = 1'b1;
          if (roots != 2'd3) roots = roots + 2'd1;
        end
      end
    end

    if (s1 == 4'd0 && s3 == 4'd0) begin
      uncorrectable = 1'b0;
      nerr          = 2'd0;
    end else if (s1 == 4'd0) begin
      uncorrectable = 1'b1;
      nerr          = 2'd0;
    end else if (sigma2 == 4'd0) begin
      uncorrectable = (roots != 2'd1);
      nerr          = 2'd1;
    end else begin
      uncorrectable = (roots != 2'd2);
      nerr          = 2'd2;
    end
    if (uncorrectable) nerr = 2'd0;

    fixed = uncorrectable ? cw : (cw ^ err_loc);
    msg   = fixed[BCH_N-1:BCH_P];
  end
endmodule
