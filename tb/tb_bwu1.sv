// tb_bwu1: runs pass A of bwu1 on random (x, dL/dy) in FP10-B and checks
// acc_done timing (5 cycles after the last beat) and, after `load`, the three
// multiplexer outputs (+term, -term, zero) against a model that rounds each
// operation to FP10-B: term = k1 * sum(dy_i * (x_i - mu)).
module tb_bwu1;
  import fp_ref_pkg::*;
  localparam int EW = 6, MW = 3;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic acc_valid = 0, acc_first = 0, acc_last = 0, load = 0;
  logic [9:0] x = '0, dy = '0, mu = '0, k1 = '0;
  logic [1:0] sel = '0;
  logic acc_done;
  logic [9:0] g2;

  bwu1 dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp_w);
    end
  endtask

  function automatic real r(input real v);
    return to_real(from_real(v, EW, MW), EW, MW);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real acc, t, g;
    logic [9:0] gw;
    int n, lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ch = 0; ch < 15; ch++) begin
      n  = 1 + int'($urandom_range(0, 50));
      mu = 10'(rand_word(EW, MW, 29, 33));
      k1 = 10'(rand_word(EW, MW, 28, 34));
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        acc_valid = ($urandom_range(0, 3) != 0) || i == 0;
        if (!acc_valid) begin
          @(negedge clk);
          acc_valid = 1;
        end
        x  = 10'(rand_word(EW, MW, 28, 34));
        dy = 10'(rand_word(EW, MW, 22, 31));
        acc_first = (i == 0); acc_last = (i == n - 1);
        t = r(r(to_real(x, EW, MW) - to_real(mu, EW, MW)) * to_real(dy, EW, MW));
        acc = (i == 0) ? t : r(acc + t);
      end
      @(negedge clk);
      acc_valid = 0; acc_first = 0; acc_last = 0;
      lat = 1;
      while (!acc_done) begin @(negedge clk); lat++; end
      check("acc_done latency", 64'(lat), 64'd5);
      gw = 10'(from_real(acc * to_real(k1, EW, MW), EW, MW));
      load = 1;
      @(negedge clk);
      load = 0;
      sel = 2'b01; #1; check("plus",  64'(g2), 64'(gw));
      sel = 2'b10; #1; check("minus", 64'(g2), (gw == 0) ? 64'd0 : 64'(gw ^ 10'h200));
      sel = 2'b00; #1; check("zero",  64'(g2), 64'd0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
