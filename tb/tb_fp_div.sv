// tb_fp_div: checks fp_div in FP10-A and FP10-B against a double-precision quotient
// rounded to each format, including division of and by zero.
module tb_fp_div;
  import fp_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [9:0] a10a, b10a, y10a, a10b, b10b, y10b;

  fp_div #(.EW(5), .MW(4)) dut_a (.a(a10a), .b(b10a), .y(y10a));
  fp_div #(.EW(6), .MW(3)) dut_b (.a(a10b), .b(b10b), .y(y10b));

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp_w);
    end
  endtask

  function automatic logic [63:0] ref_div(input logic [63:0] a, input logic [63:0] b, input int ew, input int mw);
    real ra, rb;
    ra = to_real(a, ew, mw);
    rb = to_real(b, ew, mw);
    if (ra == 0.0) return 64'd0;
    if (rb == 0.0) return from_real((a[ew+mw] ^ b[ew+mw]) ? -1.0e300 : 1.0e300, ew, mw);
    return from_real(ra / rb, ew, mw);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      a10a = 10'(rand_word(5, 4, 0, 30));
      b10a = 10'(rand_word(5, 4, 0, 30));
      a10b = 10'(rand_word(6, 3, 0, 62));
      b10b = 10'(rand_word(6, 3, 0, 62));
      #1;
      check("fp10a", 64'(y10a), ref_div(64'(a10a), 64'(b10a), 5, 4));
      check("fp10b", 64'(y10b), ref_div(64'(a10b), 64'(b10b), 6, 3));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
