// fp_mul: floating-point multiplier, input format {1,EWI,MWI}, output {1,EWO,MWO}.
//
// The two significands (with hidden ones) are multiplied exactly, the exponents are
// added and re-biased to the output format, and the product is rounded once to
// nearest-even.  A zero operand gives zero, results below the output range flush to
// zero and results above it saturate (see fp_round).  With equal formats it is the
// FP10 multiplier of the normalization units; with FP8 inputs and an FP32 output it
// is the exact multiplier of a systolic-array MAC.  Purely combinational.
module fp_mul #(
  parameter int unsigned EWI = 5,
  parameter int unsigned MWI = 4,
  parameter int unsigned EWO = 5,
  parameter int unsigned MWO = 4
) (
  input  logic [EWI+MWI:0] a,
  input  logic [EWI+MWI:0] b,
  output logic [EWO+MWO:0] y
);
  localparam int BI = (1 << (EWI - 1)) - 1;
  localparam int BO = (1 << (EWO - 1)) - 1;
  localparam int PW = 2 * (MWI + 1);
  // the rounder needs at least MWO+2 bits; pad the product on the right
  localparam int SW = (PW >= MWO + 3) ? PW : MWO + 3;

  logic [EWI-1:0] ea, eb;
  logic [PW-1:0]  p;
  logic [SW-1:0]  sig;
  logic signed [15:0] e;
  logic           zero;

  always_comb begin
    ea   = a[EWI+MWI-1:MWI];
    eb   = b[EWI+MWI-1:MWI];
    zero = (ea == '0) || (eb == '0);
    p    = PW'({1'b1, a[MWI-1:0]}) * PW'({1'b1, b[MWI-1:0]});
    // product of two values in [1,2) lies in [1,4): leading one at PW-1 or PW-2
    e    = 16'(ea) + 16'(eb) - 16'(BI) - 16'(BI) + 16'(BO);
    if (p[PW-1]) begin
      e   = e + 16'sd1;
      sig = SW'(p) << (SW - PW);
    end else begin
      sig = SW'(p) << (SW - PW + 1);
    end
    if (zero) sig = '0;
  end

  fp_round #(.EW(EWO), .MW(MWO), .SW(SW)) u_round (
    .sign(a[EWI+MWI] ^ b[EWI+MWI]), .exp_b(e), .sig(sig), .result(y)
  );
endmodule
