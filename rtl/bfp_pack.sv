// bfp_pack: packs GROUP floating-point words {1,EW,MW} into one block-floating-point
// group that shares the largest exponent.
//
// Group layout, most significant first: {e_shared[EW-1:0], {s,f}[GROUP-1], ...,
// {s,f}[0]}, i.e. EW + GROUP*(1+MW) bits (25 for FP10-A, 22 for FP10-B).  Each
// element keeps its sign and an MW-bit field f that holds its significand, hidden
// one included, shifted right by (e_shared - e_i) and truncated:
//   value_i = (-1)^s * f * 2^(e_shared - bias - (MW-1)).
// The element with the largest exponent therefore loses its last mantissa bit, and
// elements more than MW-1 binades below it become zero (the zero-setting error the
// group size trades against).  Sharing the largest exponent and shifting right
// follows the design; keeping the hidden one inside the MW-bit field (so that the
// group has exactly the design's 25 bits) and truncating are this design's
// reading.  Purely combinational.
module bfp_pack #(
  parameter int unsigned EW    = lightnorm_pkg::FP10A_EW,
  parameter int unsigned MW    = lightnorm_pkg::FP10A_MW,
  parameter int unsigned GROUP = lightnorm_pkg::GROUP
) (
  input  logic [GROUP-1:0][EW+MW:0]         x,
  output logic [EW+GROUP*(1+MW)-1:0]        g
);
  logic [EW-1:0] es;
  logic [GROUP-1:0][MW:0] fld;   // {sign, field}

  always_comb begin
    es = '0;
    for (int i = 0; i < GROUP; i++) begin
      if (x[i][EW+MW-1:MW] > es) es = x[i][EW+MW-1:MW];
    end
    for (int i = 0; i < GROUP; i++) begin
      logic [MW:0]   sig;
      logic [EW-1:0] d;
      sig = {1'b1, x[i][MW-1:0]};
      d   = es - x[i][EW+MW-1:MW];
      if (x[i][EW+MW-1:MW] == '0) fld[i] = '0;
      else                        fld[i] = {x[i][EW+MW], MW'((sig >> d) >> 1)};
    end
    g = {es, fld};
  end
endmodule
