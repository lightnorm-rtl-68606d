// fp_sqrt: square root of the magnitude of a {1,EW,MW} word.
//
// The unbiased exponent is made even (moving one factor of two into the
// significand), halved, and the significand root is found by a restoring
// bit-by-bit integer square root with three extra result bits and a sticky bit
// from the remainder, so the result is correctly rounded to nearest-even.  The
// sign is ignored: the only operand is the range-based standard deviation, which
// is never negative.  Purely combinational; used by the scalar unit for
// sigma^(-3/2).  The sign bit of the input is therefore left unused.
module fp_sqrt #(
  parameter int unsigned EW = 6,
  parameter int unsigned MW = 3
) (
  input  logic [EW+MW:0] a,
  output logic [EW+MW:0] y
);
  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam int K    = 3;
  localparam int RW   = MW + K + 1;            // root width, leading one at RW-1
  localparam int NW   = 2 * RW;                // radicand width

  logic signed [15:0] eu, e2, eo;
  logic [NW-1:0] rad, rem_v, trial;
  logic [RW-1:0] root;
  logic [RW:0]   sig;

  always_comb begin
    eu  = 16'(a[EW+MW-1:MW]) - 16'(BIAS);
    // radicand = significand * 2^(MW + 2K), with one more factor 2 for odd exponents
    rad = NW'({1'b1, a[MW-1:0]}) << (MW + 2 * K);
    if (eu[0]) begin
      rad = rad << 1;
    end
    e2  = eu - 16'(eu[0]);
    eo  = (e2 >>> 1) + 16'(BIAS);
    // restoring square root
    root  = '0;
    rem_v = '0;
    for (int i = RW - 1; i >= 0; i--) begin
      rem_v = (rem_v << 2) | NW'((rad >> (2 * i)) & NW'(3));
      trial = NW'({root, 2'b01});
      if (rem_v >= trial) begin
        rem_v = rem_v - trial;
        root  = {root[RW-2:0], 1'b1};
      end else begin
        root  = {root[RW-2:0], 1'b0};
      end
    end
    sig = {root, (rem_v != '0)};
    if (a[EW+MW-1:MW] == '0) sig = '0;
  end

  fp_round #(.EW(EW), .MW(MW), .SW(RW + 1)) u_round (
    .sign(1'b0), .exp_b(eo), .sig(sig), .result(y)
  );
endmodule
