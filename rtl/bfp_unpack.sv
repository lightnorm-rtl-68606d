// bfp_unpack: expands one block-floating-point group (layout of bfp_pack) back into
// GROUP floating-point words {1,EW,MW}.
//
// Each MW-bit field is renormalized: its leading one becomes the hidden bit and
// the exponent drops by the number of leading zeros.  The conversion is exact
// unless the renormalized exponent falls below the smallest normal, which flushes
// to zero.  A zero field gives zero.  Reading stored BFP data back into the
// normalization units is implied by the design (data are stored in BFP and reused
// in the output and backward passes) but not drawn; this is the simplest inverse
// of the packing.  Purely combinational.
module bfp_unpack #(
  parameter int unsigned EW    = lightnorm_pkg::FP10A_EW,
  parameter int unsigned MW    = lightnorm_pkg::FP10A_MW,
  parameter int unsigned GROUP = lightnorm_pkg::GROUP
) (
  input  logic [EW+GROUP*(1+MW)-1:0]        g,
  output logic [GROUP-1:0][EW+MW:0]         x
);
  logic [EW-1:0] es;

  always_comb begin
    es = g[EW+GROUP*(1+MW)-1 -: EW];
    for (int i = 0; i < GROUP; i++) begin
      logic [MW-1:0] f;
      logic          s;
      int            lz;
      int            e;
      s  = g[i*(MW+1) + MW];
      f  = g[i*(MW+1) +: MW];
      lz = MW;
      for (int b = 0; b < MW; b++) begin
        if (f[b]) lz = MW - 1 - b;
      end
      e = int'(es) - lz;
      if (f == '0 || e < 1) begin
        x[i] = '0;
      end else begin
        // shift the leading one out; the rest is the fraction
        x[i] = {s, EW'(e), MW'({f, 1'b0} << lz)};
      end
    end
  end
endmodule
