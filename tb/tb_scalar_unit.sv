// tb_scalar_unit: sends random (sigma, gamma, C(B), eps) requests, including
// sigma = 0, and checks k0 = -gamma/(sigma+eps) and
// k1 = sigma^(-3/2)*gamma*C(B)/2 against ln_ref_pkg (same step order, FP10-B
// rounding per step), the 8-cycle latency and req_ready while busy.
module tb_scalar_unit;
  import fp_ref_pkg::*;
  import ln_ref_pkg::*;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, req_valid = 0, req_ready, resp_valid;
  logic [9:0] sigma, gamma, cb, eps, k0, k1;

  scalar_unit dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp_w);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w10_t e0, e1;
    int lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      sigma = 10'(rand_word(6, 3, 20, 45)) & 10'h1FF;
      if (i % 50 == 0) sigma = '0;
      gamma = 10'(rand_word(6, 3, 28, 34));
      cb    = 10'(rand_word(6, 3, 29, 30)) & 10'h1FF;
      eps   = 10'(rand_word(6, 3, 10, 20)) & 10'h1FF;
      check("ready idle", 64'(req_ready), 64'd1);
      req_valid = 1;
      @(negedge clk);
      req_valid = 0;
      lat = 1;
      while (!resp_valid) begin
        check("ready busy", 64'(req_ready), 64'd0);
        @(negedge clk); lat++;
      end
      check("latency", 64'(lat), 64'd8);
      scalar(sigma, gamma, cb, eps, e0, e1);
      check("k0", 64'(k0), 64'(e0));
      check("k1", 64'(k1), 64'(e1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
