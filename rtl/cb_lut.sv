// cb_lut: lookup table of the range-normalization constant C(B) = 1/sqrt(2 ln B).
//
// The mini-batch size B is selected by its base-2 logarithm.  The table holds the
// six sizes the design supports, B = 16, 32, 64, 128, 256 and 1024; any other
// code gives `valid` = 0 and a zero constant.  Each entry is C(B) rounded to
// nearest-even in both FP10-A (used by the forward units to turn the range into
// sigma) and FP10-B (used by the scalar unit for the backward coefficients):
//   B     C(B)     FP10-A  FP10-B
//   16    0.42466  0x0DB   0x0EE
//   32    0.37983  0x0D8   0x0EC
//   64    0.34673  0x0D6   0x0EB
//   128   0.32101  0x0D5   0x0EA
//   256   0.30028  0x0D3   0x0EA
//   1024  0.26858  0x0D1   0x0E9
// The set of batch sizes is the design's; storing the constant in both formats is
// this design's choice.  Purely combinational.
module cb_lut (
  input  logic [3:0]                 log2_b,
  output logic                       valid,
  output lightnorm_pkg::fp10a_t      cb_a,
  output lightnorm_pkg::fp10b_t      cb_b
);
  always_comb begin
    valid = 1'b1;
    unique case (log2_b)
      4'd4:    begin cb_a = 10'h0DB; cb_b = 10'h0EE; end
      4'd5:    begin cb_a = 10'h0D8; cb_b = 10'h0EC; end
      4'd6:    begin cb_a = 10'h0D6; cb_b = 10'h0EB; end
      4'd7:    begin cb_a = 10'h0D5; cb_b = 10'h0EA; end
      4'd8:    begin cb_a = 10'h0D3; cb_b = 10'h0EA; end
      4'd10:   begin cb_a = 10'h0D1; cb_b = 10'h0E9; end
      default: begin cb_a = '0;      cb_b = '0;      valid = 1'b0; end
    endcase
  end
endmodule
