// tb_lightnorm: one channel group (32 lanes) through the whole LightNorm hardware
// by commands: forward statistics, normalization, scalar coefficients, backward
// accumulation and backward output.  The forward statistics are fed back as the
// backward-pass inputs, as a training step would.  Every statistic, y, k0/k1 (read
// hierarchically) and dL/dx is checked against ln_ref_pkg, and the command
// completion pulses are checked.  A bad batch-size code must raise cfg_error.
module tb_lightnorm;
  import fp_ref_pkg::*;
  import ln_ref_pkg::*;
  import lightnorm_pkg::*;
  localparam int L = 32, N = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [3:0] log2_b = 4'd7;
  logic [23:0] n_elems = 24'(N);
  fp10a_t inv_n_a;
  fp10b_t inv_n_b, eps_b;
  logic cfg_error;
  fp10a_t [L-1:0] gamma_a, beta_a, bw_mu, bw_sigma, bw_xmax, bw_xmin, a_x, b_x, mu, sigma, xmax, xmin, y;
  fp10b_t [L-1:0] gamma_b, a_dy, b_dy, dx;
  logic cmd_valid = 0, cmd_ready, a_done, b_done, s_done, busy;
  ln_op_e cmd_op = OP_IDLE;
  logic a_valid = 0, b_valid = 0, stat_valid, y_valid, dx_valid;

  lightnorm dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 200) $display("FAIL %s: got %h expected %h t=%0t ny=%0d", what, got, exp_w, $time, n_y);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input ln_op_e op);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  task automatic wait_pulse(input string what, ref logic sig);
    int n = 0;
    while (!sig && n < 2000) begin @(posedge clk); #1; n++; end
    check(what, 64'(sig), 64'd1);
  endtask

  w10_t xs[L][$], dys[L][$], xsb[L][$];
  w10_t expq[$];
  int   n_y = 0, n_dx = 0;

  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      n_y++;
      for (int l = 0; l < L; l++) check("y", 64'(y[l]), 64'(expq.pop_front()));
    end
    if (rst_n && dx_valid) begin
      n_dx++;
      for (int l = 0; l < L; l++) check("dx", 64'(dx[l]), 64'(expq.pop_front()));
    end
  end

  initial begin
    w10_t emu, esg, emx, emn, k0, k1, mean, term, cbb;
    inv_n_a = wa(1.0 / real'(N));
    inv_n_b = wb(1.0 / real'(N));
    eps_b   = wb(1.0e-5);
    for (int l = 0; l < L; l++) begin
      gamma_a[l] = 10'(rand_word(5, 4, 14, 15)) & 10'h1FF;
      beta_a[l]  = 10'(rand_word(5, 4, 10, 14));
      gamma_b[l] = a2b(gamma_a[l]);
      for (int i = 0; i < N; i++) begin
        xs[l].push_back(10'(rand_word(5, 4, 12, 17)));
        xsb[l].push_back(a2b(xs[l][i]));
        dys[l].push_back(10'(rand_word(6, 3, 20, 28)));
      end
    end
    a_x = '0; b_x = '0; a_dy = '0; b_dy = '0;
    bw_mu = '0; bw_sigma = '0; bw_xmax = '0; bw_xmin = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    log2_b = 4'd9; #1; check("cfg_error", 64'(cfg_error), 64'd1);
    log2_b = 4'd7; #1; check("cfg ok", 64'(cfg_error), 64'd0);

    // ---- forward statistics ----
    issue(OP_FW_STAT);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      a_valid = 1;
      for (int l = 0; l < L; l++) a_x[l] = xs[l][i];
    end
    @(negedge clk); a_valid = 0;
    wait_pulse("a_done fw", a_done);
    for (int l = 0; l < L; l++) begin
      fw_stat(xs[l], inv_n_a, 10'h0D5, emu, esg, emx, emn);
      check("mu", 64'(mu[l]), 64'(emu));
      check("sigma", 64'(sigma[l]), 64'(esg));
      check("xmax", 64'(xmax[l]), 64'(emx));
      check("xmin", 64'(xmin[l]), 64'(emn));
    end
    bw_mu = mu; bw_sigma = sigma; bw_xmax = xmax; bw_xmin = xmin;

    // ---- forward normalization ----
    issue(OP_FW_NORM);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      b_valid = 1;
      for (int l = 0; l < L; l++) begin
        b_x[l] = xs[l][i];
        expq.push_back(fw_y(b_x[l], mu[l], sigma[l], gamma_a[l], beta_a[l]));
      end
    end
    @(negedge clk); b_valid = 0;
    wait_pulse("b_done fw", b_done);
    check("y beats", 64'(n_y), 64'(N));

    // ---- scalar coefficients ----
    issue(OP_SCALAR);
    wait_pulse("s_done", s_done);
    cbb = 10'h0EA;
    for (int l = 0; l < L; l++) begin
      scalar(a2b(bw_sigma[l]), gamma_b[l], cbb, eps_b, k0, k1);
      check("k0", 64'(dut.k0_q[l]), 64'(k0));
      check("k1", 64'(dut.k1_q[l]), 64'(k1));
    end

    // ---- backward accumulation ----
    issue(OP_BW_ACC);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      a_valid = 1;
      for (int l = 0; l < L; l++) begin a_x[l] = xs[l][i]; a_dy[l] = dys[l][i]; end
    end
    @(negedge clk); a_valid = 0;
    wait_pulse("a_done bw", a_done);

    // ---- backward output ----
    issue(OP_BW_OUT);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      b_valid = 1;
      for (int l = 0; l < L; l++) begin
        b_x[l] = xs[l][i]; b_dy[l] = dys[l][i];
        scalar(a2b(bw_sigma[l]), gamma_b[l], cbb, eps_b, k0, k1);
        bw_acc(xsb[l], dys[l], a2b(bw_mu[l]), inv_n_b, k1, mean, term);
        expq.push_back(bw_dx(xsb[l][i], dys[l][i], mean, k0, term, a2b(bw_xmin[l]), a2b(bw_xmax[l])));
      end
    end
    @(negedge clk); b_valid = 0;
    wait_pulse("b_done bw", b_done);
    check("dx beats", 64'(n_dx), 64'(N));
    check("drained", 64'(expq.size()), 64'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
