// tb_bfp_converter: drives random FP32 rows through both converter flavours
// (FP10-A and FP10-B, 32 lanes) and checks the quantized values, the shared
// exponents and every packed field against a real-valued model (round to the FP10
// format, then truncate each magnitude to a multiple of 2^(e_shared-(MW-1))).
// It also unpacks the groups with bfp_unpack and checks the values it returns,
// and the one-cycle latency.
module tb_bfp_converter;
  import fp_ref_pkg::*;
  localparam int LANES = 32, G = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [LANES-1:0][31:0] in;
  logic va, vb;
  logic [LANES-1:0][9:0] qa, qb;
  logic [7:0][24:0] pa;
  logic [7:0][21:0] pb;
  logic [7:0][3:0][9:0] ua, ub;

  bfp_converter #(.EW(5), .MW(4)) dut_a (.clk, .rst_n, .in_valid, .in, .out_valid(va), .q(qa), .packed_q(pa));
  bfp_converter #(.EW(6), .MW(3)) dut_b (.clk, .rst_n, .in_valid, .in, .out_valid(vb), .q(qb), .packed_q(pb));

  for (genvar k = 0; k < 8; k++) begin : g_u
    bfp_unpack #(.EW(5), .MW(4)) u_a (.g(pa[k]), .x(ua[k]));
    bfp_unpack #(.EW(6), .MW(3)) u_b (.g(pb[k]), .x(ub[k]));
  end

  always #5 clk = ~clk;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp_w);
    end
  endtask

  // checks one flavour; q/p/u are passed as flat words
  task automatic check_fmt(input int ew, input int mw, input logic [LANES-1:0][9:0] q,
                           input logic [255:0] p, input logic [7:0][3:0][9:0] u);
    int gw, bias, es, eu;
    real v, step, mag;
    logic [63:0] grp, fld;
    gw   = ew + G * (1 + mw);
    bias = (1 << (ew - 1)) - 1;
    for (int l = 0; l < LANES; l++)
      check("quant", 64'(q[l]), from_real(to_real(in[l], 8, 23), ew, mw));
    for (int k = 0; k < LANES / G; k++) begin
      grp = (p >> (k * gw)) & ((64'd1 << gw) - 1);
      es = 0;
      for (int i = 0; i < G; i++) begin
        eu = int'((q[k*G+i] >> mw) & ((1 << ew) - 1));
        if (eu > es) es = eu;
      end
      check("shared exp", grp >> (G * (1 + mw)), 64'(es));
      step = 2.0 ** (es - bias - (mw - 1));
      for (int i = 0; i < G; i++) begin
        v   = to_real(q[k*G+i], ew, mw);
        mag = (v < 0.0) ? -v : v;
        fld = (grp >> (i * (1 + mw))) & ((64'd1 << (1 + mw)) - 1);
        check("field", fld & ((64'd1 << mw) - 1), 64'($floor(mag / step)));
        if ($floor(mag / step) != 0.0)
          check("sign", 64'(fld[mw]), 64'(v < 0.0));
        // unpacked value
        check("unpack", 64'(to_real(u[k][i], ew, mw) == ((v < 0.0) ? -1.0 : 1.0) * $floor(mag / step) * step
                             || (to_real(u[k][i], ew, mw) == 0.0 && $floor(mag / step) * step < 2.0 ** (1 - bias))), 64'd1);
      end
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        in[l] = 32'(rand_word(8, 23, 120, 134));
        if (l % 5 == it % 5) in[l] = 32'(rand_word(8, 23, 0, 0));
        if (it == 7) in[l] = 32'h7F00_0000;                 // huge: saturates
      end
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      check("valid", 64'({va, vb}), 64'd3);
      check_fmt(5, 4, qa, 256'(pa), ua);
      check_fmt(6, 3, qb, 256'(pb), ub);
      @(posedge clk); #1;
      check("valid drop", 64'({va, vb}), 64'd0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
