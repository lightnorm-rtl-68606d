// fp_add: floating-point adder/subtractor for a {1,EW,MW} format.
//
// Computes a + b (or a - b when `sub` is set) with one rounding, to nearest-even.
// The operand with the smaller magnitude is shifted right by the exponent
// difference into a field with guard, round and sticky bits, so a value that is
// shifted past the last mantissa bit only survives as sticky: this is the
// zero-setting error that limits narrow formats.  Exponent field 0 is zero, there
// are no subnormals and overflow saturates (see fp_round).  Purely combinational;
// the pipeline registers of the units that use it sit outside.
module fp_add #(
  parameter int unsigned EW = 5,
  parameter int unsigned MW = 4
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  input  logic           sub,
  output logic [EW+MW:0] y
);
  localparam int W  = MW + 4;     // hidden + fraction + guard + round + sticky
  localparam int WS = W + 1;      // plus carry

  logic          sa, sb, sl, ss;
  logic [EW-1:0] ea, eb, el, es;
  logic [MW:0]   ma, mb, ml, msm;
  logic [W-1:0]  al, as_sh, shifted_out_mask;
  logic [15:0]   d;
  logic          st;
  logic [WS-1:0] sum;
  logic [WS-1:0] norm;
  logic signed [15:0] e_res;
  logic          s_res;
  int            lz;

  always_comb begin
    sa = a[EW+MW];
    sb = b[EW+MW] ^ sub;
    ea = a[EW+MW-1:MW];
    eb = b[EW+MW-1:MW];
    ma = (ea == '0) ? '0 : {1'b1, a[MW-1:0]};
    mb = (eb == '0) ? '0 : {1'b1, b[MW-1:0]};
    // order by magnitude: l is the larger operand
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; msm = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; msm = ma;
    end
    d  = 16'(el) - 16'(es);
    shifted_out_mask = '0;
    al = {ml, 3'b000};
    as_sh = {msm, 3'b000};
    if (msm == '0) begin
      st = 1'b0;
      as_sh = '0;
    end else if (d >= 16'(W)) begin
      st = 1'b1;
      as_sh = '0;
    end else begin
      shifted_out_mask = (W'(1) << d) - W'(1);
      st = |(as_sh & shifted_out_mask);
      as_sh = as_sh >> d;
    end
    as_sh[0] = as_sh[0] | st;
    if (sl == ss) sum = {1'b0, al} + {1'b0, as_sh};
    else          sum = {1'b0, al} - {1'b0, as_sh};
    s_res = sl;
    // normalize so that the leading one lands on bit WS-1
    lz = WS;
    for (int i = 0; i < WS; i++) begin
      if (sum[i]) lz = WS - 1 - i;
    end
    norm  = sum << lz;
    // bit WS-2 of sum corresponds to exponent el; a carry into WS-1 adds one
    e_res = 16'(el) + 16'sd1 - 16'(lz);
    if (ml == '0) begin
      // both operands are zero
      norm = '0;
    end
  end

  logic [EW+MW:0] r;
  fp_round #(.EW(EW), .MW(MW), .SW(WS)) u_round (
    .sign(s_res), .exp_b(e_res), .sig(norm), .result(r)
  );

  // an exact cancellation gives +0
  assign y = (sum == '0) ? '0 : r;
endmodule
