// fp_convert: converts a {1,EWI,MWI} word to a {1,EWO,MWO} word.
//
// The exponent is re-biased and the significand rounded once to nearest-even;
// values outside the target range flush to zero or saturate (see fp_round).  It is
// the quantizer of the BFP converters (FP32 outputs of the systolic array to FP10)
// and the FP10-A to FP10-B conversion of the statistics handed from the forward
// to the backward pass.  Purely combinational.
module fp_convert #(
  parameter int unsigned EWI = 8,
  parameter int unsigned MWI = 23,
  parameter int unsigned EWO = 5,
  parameter int unsigned MWO = 4
) (
  input  logic [EWI+MWI:0] a,
  output logic [EWO+MWO:0] y
);
  localparam int BI = (1 << (EWI - 1)) - 1;
  localparam int BO = (1 << (EWO - 1)) - 1;
  localparam int SW = (MWI + 1 >= MWO + 3) ? MWI + 1 : MWO + 3;

  logic [SW-1:0] sig;
  logic signed [15:0] e;

  always_comb begin
    sig = SW'({1'b1, a[MWI-1:0]}) << (SW - MWI - 1);
    if (a[EWI+MWI-1:MWI] == '0) sig = '0;
    e = 16'(a[EWI+MWI-1:MWI]) - 16'(BI) + 16'(BO);
  end

  fp_round #(.EW(EWO), .MW(MWO), .SW(SW)) u_round (
    .sign(a[EWI+MWI]), .exp_b(e), .sig(sig), .result(y)
  );
endmodule
