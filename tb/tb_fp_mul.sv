// tb_fp_mul: checks fp_mul in FP10-A and FP10-B and the FP8 x FP8 -> FP32 variant
// used by the systolic-array MACs, against a double-precision reference.
module tb_fp_mul;
  import fp_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [9:0]  a10a, b10a, y10a, a10b, b10b, y10b;
  logic [7:0]  a8, b8;
  logic [31:0] y32;

  fp_mul #(.EWI(5), .MWI(4), .EWO(5), .MWO(4))  dut_a (.a(a10a), .b(b10a), .y(y10a));
  fp_mul #(.EWI(6), .MWI(3), .EWO(6), .MWO(3))  dut_b (.a(a10b), .b(b10b), .y(y10b));
  fp_mul #(.EWI(5), .MWI(2), .EWO(8), .MWO(23)) dut_8 (.a(a8),   .b(b8),   .y(y32));

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
    for (int i = 0; i < 4000; i++) begin
      a10a = 10'(rand_word(5, 4, 0, 30));
      b10a = 10'(rand_word(5, 4, 0, 30));
      a10b = 10'(rand_word(6, 3, 0, 62));
      b10b = 10'(rand_word(6, 3, 0, 62));
      a8   = 8'(rand_word(5, 2, 0, 31));
      b8   = 8'(rand_word(5, 2, 0, 31));
      #1;
      check("fp10a", 64'(y10a), from_real(to_real(a10a, 5, 4) * to_real(b10a, 5, 4), 5, 4));
      check("fp10b", 64'(y10b), from_real(to_real(a10b, 6, 3) * to_real(b10b, 6, 3), 6, 3));
      check("fp8",   64'(y32),  from_real(to_real(a8, 5, 2) * to_real(b8, 5, 2), 8, 23));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
