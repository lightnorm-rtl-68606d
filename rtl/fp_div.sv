// fp_div: floating-point divider for a {1,EW,MW} format, y = a / b.
//
// The significand quotient is formed by an exact integer division with MW+3 extra
// quotient bits; a non-zero remainder is folded into the sticky bit, so the result
// is correctly rounded to nearest-even.  0/b is zero; a/0 saturates to the largest
// finite value with the sign of a^b (the normalization divides by sigma, which is
// zero when every input of a channel is equal).  Purely combinational; it is the
// divider of FWU1 and of the scalar unit.
module fp_div #(
  parameter int unsigned EW = 5,
  parameter int unsigned MW = 4
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam int K    = MW + 3;                 // extra quotient bits
  localparam int NW   = MW + 1 + K;             // dividend width
  localparam int SW   = K + 1;                  // quotient width (q < 2^(K+1))
  localparam logic [EW+MW:0] MAXV = {1'b0, EW'((1 << EW) - 2), {MW{1'b1}}};

  logic [EW-1:0] ea, eb;
  logic [NW-1:0] num, den, q, rem;
  logic [SW-1:0] sig;
  logic signed [15:0] e;
  logic [EW+MW:0] r;
  logic s;

  always_comb begin
    ea  = a[EW+MW-1:MW];
    eb  = b[EW+MW-1:MW];
    s   = a[EW+MW] ^ b[EW+MW];
    num = NW'({1'b1, a[MW-1:0]}) << K;
    den = NW'({1'b1, b[MW-1:0]});
    q   = num / den;
    rem = num % den;
    // quotient of two values in [1,2) lies in (1/2, 2): leading one at K or K-1
    e   = 16'(ea) - 16'(eb) + 16'(BIAS);
    if (q[K]) begin
      sig = SW'(q);
    end else begin
      sig = SW'(q) << 1;
      e   = e - 16'sd1;
    end
    sig[0] = sig[0] | (rem != '0);
    if (ea == '0) sig = '0;
  end

  fp_round #(.EW(EW), .MW(MW), .SW(SW)) u_round (
    .sign(s), .exp_b(e), .sig(sig), .result(r)
  );

  always_comb begin
    if (ea == '0)      y = '0;
    else if (eb == '0) y = MAXV | {s, {(EW+MW){1'b0}}};
    else               y = r;
  end
endmodule
