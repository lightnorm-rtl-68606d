// tb_fwu0: streams several channels of random FP10-A data through fwu0 and checks
// mu, sigma, xmax and xmin against a model that rounds each operation to FP10-A
// in the same order (sum, then *1/N; max-min, then *C(B)).  Also checks that
// stat_valid rises exactly 3 cycles after the last beat.
module tb_fwu0;
  import fp_ref_pkg::*;
  localparam int EW = 5, MW = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [9:0] x = '0, inv_n = '0, cb = '0;
  logic stat_valid;
  logic [9:0] mu, sigma, xmax, xmin;

  fwu0 dut (.*);

  always #5 clk = ~clk;

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

  initial begin
    real acc, mx, mn, xv, c;
    int  n, lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 12; pass++) begin
      n = 1 + int'($urandom_range(0, 60));
      c = (pass % 2) ? 0.3 : 0.42;
      inv_n = 10'(from_real(1.0 / real'(n), EW, MW));
      cb    = 10'(from_real(c, EW, MW));
      for (int i = 0; i < n; i++) begin
        x = 10'(rand_word(EW, MW, 11, 17));
        if (pass == 3) x = 10'h0F0;                    // all equal: range 0
        xv = to_real(x, EW, MW);
        if (i == 0) begin acc = xv; mx = xv; mn = xv; end
        else begin
          acc = to_real(from_real(acc + xv, EW, MW), EW, MW);
          if (xv > mx) mx = xv;
          if (xv < mn) mn = xv;
        end
        in_valid <= 1; in_first <= (i == 0); in_last <= (i == n - 1);
        @(posedge clk);
        #1;
        in_valid = 0; in_first = 0; in_last = 0;
        // random gaps in the stream
        if ($urandom_range(0, 3) == 0) @(posedge clk);
        #0;
      end
      lat = 0;
      while (!stat_valid) begin @(posedge clk); #1; lat++; end
      check("latency", 64'(lat), 64'd2);    // sampled 1 step after edge: t+3
      check("mu", 64'(mu), from_real(to_real(from_real(acc, EW, MW), EW, MW) * to_real(inv_n, EW, MW), EW, MW));
      check("sigma", 64'(sigma), from_real(to_real(from_real(mx - mn, EW, MW), EW, MW) * to_real(cb, EW, MW), EW, MW));
      check("xmax", 64'(to_real(xmax, EW, MW) == mx), 64'd1);
      check("xmin", 64'(to_real(xmin, EW, MW) == mn), 64'd1);
      @(posedge clk); #1;
      check("pulse", 64'(stat_valid), 64'd0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
