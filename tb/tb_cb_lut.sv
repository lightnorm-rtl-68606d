// tb_cb_lut: computes C(B) = 1/sqrt(2 ln B) in double precision for every
// supported B, rounds it to FP10-A and FP10-B, and compares with the table; all
// other codes must report valid = 0.
module tb_cb_lut;
  import fp_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [3:0] log2_b;
  logic valid;
  logic [9:0] cb_a, cb_b;

  cb_lut dut (.*);

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      $display("FAIL %s (log2 B = %0d): got %h expected %h", what, log2_b, got, exp_w);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real c;
    bit ok;
    for (int k = 0; k < 16; k++) begin
      log2_b = 4'(k);
      #1;
      ok = (k inside {4, 5, 6, 7, 8, 10});
      check("valid", 64'(valid), 64'(ok));
      if (ok) begin
        c = 1.0 / $sqrt(2.0 * $ln(real'(64'd1 << k)));
        check("cb_a", 64'(cb_a), from_real(c, 5, 4));
        check("cb_b", 64'(cb_b), from_real(c, 6, 3));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
