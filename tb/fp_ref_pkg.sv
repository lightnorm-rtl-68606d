// fp_ref_pkg: reference model of the {1,EW,MW} formats for the testbenches.
//
// Works on `real` values: to_real() decodes a word, from_real() rounds a real value
// to the nearest representable word (ties to even), flushing results below the
// smallest normal to zero and saturating results above the largest finite value,
// which is the number system the RTL implements.  The arithmetic here is written
// independently of the RTL: it goes through double precision, which holds every
// sum and product the testbenches form exactly.
package fp_ref_pkg;

  function automatic real to_real(input logic [63:0] w, input int ew, input int mw);
    int  e, bias;
    real v;
    bias = (1 << (ew - 1)) - 1;
    e = int'((w >> mw) & ((64'd1 << ew) - 1));
    if (e == 0) return 0.0;
    v = 1.0 + real'(w & ((64'd1 << mw) - 1)) / real'(64'd1 << mw);
    v = v * (2.0 ** (e - bias));
    if (w[ew + mw]) v = -v;
    return v;
  endfunction

  function automatic logic [63:0] from_real(input real v, input int ew, input int mw);
    logic    s;
    real     a, fr, rem;
    int      e, be, bias, emax;
    longint  f;
    bias = (1 << (ew - 1)) - 1;
    emax = (1 << ew) - 2;
    if (v == 0.0) return 64'd0;
    s = (v < 0.0);
    a = s ? -v : v;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    fr  = (a - 1.0) * real'(64'd1 << mw);
    f   = longint'($floor(fr));
    rem = fr - real'(f);
    if (rem > 0.5 || (rem == 0.5 && f[0])) f++;
    if (f == (64'sd1 << mw)) begin f = 0; e++; end
    be = e + bias;
    if (be < 1) return 64'd0;
    if (be > emax) return (64'(s) << (ew + mw)) | (64'(emax) << mw) | ((64'd1 << mw) - 1);
    return (64'(s) << (ew + mw)) | (64'(be) << mw) | 64'(f);
  endfunction

  // a random word whose exponent field lies in [elo, ehi] (0 gives zero)
  function automatic logic [63:0] rand_word(input int ew, input int mw, input int elo, input int ehi);
    logic [63:0] w;
    int e;
    e = elo + int'($urandom_range(0, ehi - elo));
    w = (64'($urandom) & ((64'd1 << mw) - 1));
    w = w | (64'(e) << mw) | (64'($urandom_range(0, 1)) << (ew + mw));
    if (e == 0) w = 64'd0;
    return w;
  endfunction

endpackage
