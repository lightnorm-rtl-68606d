// tb_fw_module: streams a statistics pass and then a normalization pass through
// all 32 lanes of the forward module, each lane with its own random data, gamma
// and beta, and checks every statistic and every y against ln_ref_pkg; the next
// statistics pass is started while the normalization pass runs (the two-stage
// overlap of fwu0 and fwu1).  Also checks stat_valid 3 cycles after the last beat
// and y 4 cycles after its input.
module tb_fw_module;
  import fp_ref_pkg::*;
  import ln_ref_pkg::*;
  localparam int L = 32, N = 24;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_first = 0, s_last = 0, n_load = 0, n_valid = 0;
  logic [L-1:0][9:0] s_x, n_x, gamma, beta, mu, sigma, xmax, xmin, y;
  logic [9:0] inv_n, cb;
  logic stat_valid, y_valid;

  fw_module dut (.*);
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

  w10_t data[2][L][$];
  w10_t emu[2][L], esg[2][L], emx[2][L], emn[2][L];
  w10_t expq[$];
  int   cyc = 0, sent[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && y_valid) begin
      check("latency", 64'(cyc - sent.pop_front()), 64'd4);
      for (int l = 0; l < L; l++) check("y", 64'(y[l]), 64'(expq.pop_front()));
    end
  end

  task automatic stat_pass(input int t);
    int lat;
    for (int l = 0; l < L; l++) data[t%2][l].delete();
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      s_valid = 1; s_first = (i == 0); s_last = (i == N - 1);
      for (int l = 0; l < L; l++) begin
        s_x[l] = 10'(rand_word(5, 4, 12 + l % 3, 16 + l % 2));
        data[t%2][l].push_back(s_x[l]);
      end
    end
    @(negedge clk);
    s_valid = 0; s_first = 0; s_last = 0;
    lat = 1;
    while (!stat_valid) begin @(negedge clk); lat++; end
    check("stat latency", 64'(lat), 64'd3);
    for (int l = 0; l < L; l++) begin
      fw_stat(data[t%2][l], inv_n, cb, emu[t%2][l], esg[t%2][l], emx[t%2][l], emn[t%2][l]);
      check("mu", 64'(mu[l]), 64'(emu[t%2][l]));
      check("sigma", 64'(sigma[l]), 64'(esg[t%2][l]));
      check("xmax", 64'(xmax[l]), 64'(emx[t%2][l]));
      check("xmin", 64'(xmin[l]), 64'(emn[t%2][l]));
    end
  endtask

  task automatic norm_pass(input int t);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      n_valid = 1;
      for (int l = 0; l < L; l++) begin
        n_x[l] = data[t%2][l][i];
        expq.push_back(fw_y(n_x[l], emu[t%2][l], esg[t%2][l], gamma[l], beta[l]));
      end
      sent.push_back(cyc);
    end
    @(negedge clk);
    n_valid = 0;
  endtask

  initial begin
    inv_n = wa(1.0 / real'(N));
    cb    = 10'h0D5;                  // C(128)
    for (int l = 0; l < L; l++) begin
      gamma[l] = 10'(rand_word(5, 4, 13, 16)) & 10'h1FF;
      beta[l]  = 10'(rand_word(5, 4, 10, 15));
    end
    s_x = '0; n_x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    stat_pass(0);
    for (int t = 0; t < 3; t++) begin
      @(negedge clk); n_load = 1;
      @(negedge clk); n_load = 0;
      fork
        norm_pass(t);
        if (t < 2) stat_pass(t + 1);
      join
    end
    repeat (6) @(negedge clk);
    check("drained", 64'(expq.size()), 64'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
