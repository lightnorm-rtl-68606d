// fp_round: rounds and packs a normalized significand into a {1,EW,MW} word.
//
// Input `sig` carries the significand with its leading one at bit SW-1 (or is zero);
// bits below the MW fraction bits are rounded to nearest, ties to even.  `exp_b` is
// the biased exponent that belongs to the leading one, as a signed number so that
// underflow and overflow can be seen.  A result whose biased exponent ends below 1
// flushes to zero; one above 2^EW-2 saturates to the largest finite value.  The
// all-ones exponent is never produced.  Purely combinational; used by every
// arithmetic unit of the design.  The rounding mode and the saturation are this
// design's choices.
module fp_round #(
  parameter int unsigned EW = 5,
  parameter int unsigned MW = 4,
  parameter int unsigned SW = 16        // significand input width, SW >= MW+2
) (
  input  logic                 sign,
  input  logic signed [15:0]   exp_b,
  input  logic [SW-1:0]        sig,
  output logic [EW+MW:0]       result
);
  localparam int EMAX = (1 << EW) - 2;

  logic [MW:0]   kept;          // hidden one + fraction
  logic          guard, sticky, round_up;
  logic [MW+1:0] rounded;
  logic signed [15:0] e_fin;

  always_comb begin
    kept     = sig[SW-1 -: (MW+1)];
    guard    = sig[SW-MW-2];
    sticky   = (SW >= MW+3) ? |(sig & ((SW'(1) << (SW-MW-2)) - SW'(1))) : 1'b0;
    round_up = guard & (sticky | kept[0]);
    rounded  = {1'b0, kept} + (MW+2)'(round_up);
    e_fin    = exp_b;
    if (rounded[MW+1]) begin
      e_fin   = exp_b + 16'sd1;
    end
    if (!sig[SW-1]) begin
      result = '0;
    end else if (e_fin < 16'sd1) begin
      result = '0;
    end else if (e_fin > 16'(EMAX)) begin
      result = {sign, EW'(EMAX), {MW{1'b1}}};
    end else begin
      // on a carry the fraction is all zeros, which rounded[MW-1:0] already holds
      result = {sign, e_fin[EW-1:0], rounded[MW-1:0]};
    end
  end
endmodule
