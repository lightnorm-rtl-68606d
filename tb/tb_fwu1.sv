// tb_fwu1: streams random FP10-A elements through fwu1 with random mu, sigma,
// gamma, beta, and checks every y against a model that rounds each of the four
// operations to FP10-A, and that y leaves exactly 4 cycles after x enters.
module tb_fwu1;
  import fp_ref_pkg::*;
  localparam int EW = 5, MW = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [9:0] x = '0, mu = '0, sigma = '0, gamma = '0, beta = '0;
  logic out_valid;
  logic [9:0] y;

  fwu1 dut (.*);

  always #5 clk = ~clk;

  logic [9:0] expq[$];
  int         sent_cycle[$];
  int         cyc = 0;

  function automatic logic [9:0] model(input logic [9:0] xi);
    real d, xh, p;
    d  = to_real(from_real(to_real(xi, EW, MW) - to_real(mu, EW, MW), EW, MW), EW, MW);
    if (to_real(sigma, EW, MW) == 0.0)
      xh = to_real(from_real((d == 0.0) ? 0.0 : ((d < 0.0) != sigma[9] ? -1e30 : 1e30), EW, MW), EW, MW);
    else
      xh = to_real(from_real(d / to_real(sigma, EW, MW), EW, MW), EW, MW);
    p  = to_real(from_real(xh * to_real(gamma, EW, MW), EW, MW), EW, MW);
    return 10'(from_real(p + to_real(beta, EW, MW), EW, MW));
  endfunction

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp_w);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      if (expq.size() == 0) begin
        checks++; failures++;
        $display("FAIL unexpected output");
      end else begin
        check("y", 64'(y), 64'(expq.pop_front()));
        check("latency", 64'(cyc - sent_cycle.pop_front()), 64'd4);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 10; blk++) begin
      mu    = 10'(rand_word(EW, MW, 12, 16));
      sigma = 10'(rand_word(EW, MW, 13, 17)) & 10'h1FF;   // positive
      gamma = 10'(rand_word(EW, MW, 13, 16));
      beta  = 10'(rand_word(EW, MW, 0, 15));
      for (int i = 0; i < 100; i++) begin
        @(negedge clk);
        in_valid = ($urandom_range(0, 4) != 0);
        x = 10'(rand_word(EW, MW, 10, 18));
        if (in_valid) begin
          expq.push_back(model(x));
          sent_cycle.push_back(cyc);
        end
      end
      @(negedge clk);
      in_valid = 0;
      repeat (6) @(negedge clk);
    end
    check("drained", 64'(expq.size()), 64'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
