// tb_bw_module: runs pass A and pass B of the backward module on all 32 lanes with
// random FP10-B data, per-lane mu, coefficients and extremes, and checks every
// dL/dx against ln_ref_pkg (including the +term for the channel minimum and the
// -term for the maximum), acc_done 5 cycles after the last beat, and dx 3 cycles
// after its input.
module tb_bw_module;
  import fp_ref_pkg::*;
  import ln_ref_pkg::*;
  localparam int L = 32, N = 20;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic a_valid = 0, a_first = 0, a_last = 0, b_load = 0, b_valid = 0;
  logic [L-1:0][9:0] mu, xmax, xmin, k0, k1, a_x, a_dy, b_x, b_dy, dx;
  logic [9:0] inv_n;
  logic acc_done, dx_valid;

  bw_module dut (.*);
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

  w10_t xs[L][$], dys[L][$];
  w10_t mean[L], term[L];
  w10_t expq[$];
  int   cyc = 0, sent[$], n_ext = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dx_valid) begin
      check("latency", 64'(cyc - sent.pop_front()), 64'd3);
      for (int l = 0; l < L; l++) check("dx", 64'(dx[l]), 64'(expq.pop_front()));
    end
  end

  initial begin
    int lat;
    real mx, mn;
    inv_n = wb(1.0 / real'(N));
    a_x = '0; a_dy = '0; b_x = '0; b_dy = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      for (int l = 0; l < L; l++) begin
        xs[l].delete(); dys[l].delete();
        mu[l] = 10'(rand_word(6, 3, 30, 32));
        k0[l] = 10'(rand_word(6, 3, 29, 33));
        k1[l] = 10'(rand_word(6, 3, 29, 33));
        for (int i = 0; i < N; i++) begin
          xs[l].push_back(10'(rand_word(6, 3, 29, 33)));
          dys[l].push_back(10'(rand_word(6, 3, 22, 30)));
        end
        mx = -1e30; mn = 1e30;
        for (int i = 0; i < N; i++) begin
          if (vb(xs[l][i]) > mx) begin mx = vb(xs[l][i]); xmax[l] = xs[l][i]; end
          if (vb(xs[l][i]) < mn) begin mn = vb(xs[l][i]); xmin[l] = xs[l][i]; end
        end
        bw_acc(xs[l], dys[l], mu[l], inv_n, k1[l], mean[l], term[l]);
      end
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        a_valid = 1; a_first = (i == 0); a_last = (i == N - 1);
        for (int l = 0; l < L; l++) begin a_x[l] = xs[l][i]; a_dy[l] = dys[l][i]; end
      end
      @(negedge clk);
      a_valid = 0; a_first = 0; a_last = 0;
      lat = 1;
      while (!acc_done) begin @(negedge clk); lat++; end
      check("acc_done latency", 64'(lat), 64'd5);
      b_load = 1;
      @(negedge clk);
      b_load = 0;
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        b_valid = 1;
        for (int l = 0; l < L; l++) begin
          b_x[l] = xs[l][i]; b_dy[l] = dys[l][i];
          if (b_x[l] == xmin[l] || b_x[l] == xmax[l]) n_ext++;
          expq.push_back(bw_dx(b_x[l], b_dy[l], mean[l], k0[l], term[l], xmin[l], xmax[l]));
        end
        sent.push_back(cyc);
      end
      @(negedge clk);
      b_valid = 0;
      repeat (5) @(negedge clk);
    end
    check("drained", 64'(expq.size()), 64'd0);
    check("extremes seen", 64'(n_ext >= 2 * L), 64'd1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
