// tb_fp_add: checks fp_add in FP10-A, FP10-B and FP32 against a double-precision
// reference rounded to each format, on random operands (exponents near each other
// and far apart, zeros, cancellations, overflow).
module tb_fp_add;
  import fp_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [9:0]  a10a, b10a, y10a;
  logic [9:0]  a10b, b10b, y10b;
  logic [31:0] a32, b32, y32;
  logic        sub;

  fp_add #(.EW(5), .MW(4))  dut_a (.a(a10a), .b(b10a), .sub(sub), .y(y10a));
  fp_add #(.EW(6), .MW(3))  dut_b (.a(a10b), .b(b10b), .sub(sub), .y(y10b));
  fp_add #(.EW(8), .MW(23)) dut_f (.a(a32),  .b(b32),  .sub(sub), .y(y32));

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp_w);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb, rr;
    logic [63:0] e;
    int eb;
    for (int i = 0; i < 4000; i++) begin
      sub  = $urandom_range(0, 1);
      a10a = 10'(rand_word(5, 4, 0, 30));
      eb   = (i % 2) ? int'($urandom_range(0, 30)) : int'((a10a >> 4) & 31);
      b10a = 10'(rand_word(5, 4, eb, eb));
      if (i % 7 == 0) b10a = a10a;                         // exact cancellation / doubling
      a10b = 10'(rand_word(6, 3, 0, 62));
      b10b = 10'(rand_word(6, 3, 0, 62));
      a32  = 32'(rand_word(8, 23, 100, 150));
      b32  = 32'(rand_word(8, 23, 100 + (i % 20), 100 + (i % 20) + 20));
      #1;
      rr = to_real(a10a, 5, 4) + (sub ? -1.0 : 1.0) * to_real(b10a, 5, 4);
      check("fp10a", 64'(y10a), from_real(rr, 5, 4));
      rr = to_real(a10b, 6, 3) + (sub ? -1.0 : 1.0) * to_real(b10b, 6, 3);
      check("fp10b", 64'(y10b), from_real(rr, 6, 3));
      rr = to_real(a32, 8, 23) + (sub ? -1.0 : 1.0) * to_real(b32, 8, 23);
      check("fp32", 64'(y32), from_real(rr, 8, 23));
    end
    // a few fixed cases: 1.0 + 1.0 = 2.0, max + max saturates, 1 - 1 = +0
    sub = 0; a10a = 10'h0F0; b10a = 10'h0F0; #1; check("1+1", 64'(y10a), 64'h100);
    a10a = 10'h1EF; b10a = 10'h1EF; #1; check("sat", 64'(y10a), 64'h1EF);
    sub = 1; a10a = 10'h0F0; b10a = 10'h0F0; #1; check("1-1", 64'(y10a), 64'h000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
