// tb_bwu0: runs pass A (sum of dL/dy) and pass B (per-element output) of bwu0 on
// random FP10-B data and checks acc_done timing (2 cycles after the last beat),
// every output against a model that rounds each operation to FP10-B, and the
// 2-cycle output latency.  Pass A of the next channel overlaps pass B of the
// current one to check that `load` isolates them.
module tb_bwu0;
  import fp_ref_pkg::*;
  localparam int EW = 6, MW = 3;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic acc_valid = 0, acc_first = 0, acc_last = 0, load = 0, in_valid = 0;
  logic [9:0] acc_dy = '0, inv_n = '0, dy = '0, k0 = '0;
  logic acc_done, out_valid;
  logic [9:0] g1;

  bwu0 dut (.*);
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

  function automatic real r(input real v);
    return to_real(from_real(v, EW, MW), EW, MW);
  endfunction

  logic [9:0] dys[2][64];
  real        mean[2];
  int         n = 40;
  logic [9:0] expq[$];
  int         cyc = 0, sent[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      if (expq.size() == 0) begin checks++; failures++; end
      else begin
        check("g1", 64'(g1), 64'(expq.pop_front()));
        check("latency", 64'(cyc - sent.pop_front()), 64'd2);
      end
    end
  end

  task automatic pass_a(input int ch);
    real acc;
    int lat;
    for (int i = 0; i < n; i++) begin
      dys[ch % 2][i] = 10'(rand_word(EW, MW, 25, 33));
      acc = (i == 0) ? to_real(dys[ch % 2][i], EW, MW) : r(acc + to_real(dys[ch % 2][i], EW, MW));
      @(negedge clk);
      acc_valid = 1; acc_first = (i == 0); acc_last = (i == n - 1); acc_dy = dys[ch % 2][i];
    end
    @(negedge clk);
    acc_valid = 0; acc_first = 0; acc_last = 0;
    mean[ch % 2] = r(acc * to_real(inv_n, EW, MW));
    lat = 1;
    while (!acc_done) begin @(negedge clk); lat++; end
    check("acc_done latency", 64'(lat), 64'd2);
  endtask

  task automatic pass_b(input int ch);
    @(negedge clk);
    load = 1;
    @(negedge clk);
    load = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1; dy = dys[ch % 2][i];
      expq.push_back(10'(from_real(r(mean[ch % 2] + to_real(dy, EW, MW)) * to_real(k0, EW, MW), EW, MW)));
      sent.push_back(cyc);
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    inv_n = 10'(from_real(1.0 / 40.0, EW, MW));
    k0    = 10'(from_real(-0.75, EW, MW));
    repeat (3) @(posedge clk);
    rst_n = 1;
    pass_a(0);
    for (int ch = 0; ch < 6; ch++) begin
      fork
        pass_b(ch);
        begin
          repeat (5) @(negedge clk);
          if (ch < 5) pass_a(ch + 1);
        end
      join
    end
    repeat (5) @(negedge clk);
    check("drained", 64'(expq.size()), 64'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
