// tb_lightnorm_accel: end-to-end test of the accelerator at its default size
// (32x32 array, 32 normalization lanes, 32/32/24 KB buffers).  The testbench plays
// host and DRAM.  It runs one batch-normalization layer through a training step:
//   load weights; GEMM_FW of two 8-beat chunks of group 1 (one 16-element
//   statistics pass spanning two commands); NORM_FW of group 1 in two commands
//   with the statistics pass of group 2 (GEMM_FW) issued between them, so that a
//   statistics pass and an output pass are open at the same time; SCALAR;
//   GEMM_BW (dL/dy, with the stored x read back); NORM_BW (dL/dx).
// Commands are issued back to back, so the host also waits on acmd_ready.
// A reference model computes every step: the FP32 GEMM sums in array order, FP10
// rounding, block-floating-point truncation of stored data, the statistics, y,
// k0/k1, the backward accumulators and dL/dx.  The testbench checks the statistics
// of both groups, k0/k1, and every OBUF word it reads back through bfp_unpack.
// It counts the mechanisms the run must exercise (stall on acmd_ready, open
// statistics and output passes at once, a pass spanning commands, the switch from
// forward to backward passes, two OBUF reads per dL/dx beat, BFP truncation of a
// stored value, the xmin/xmax term of dL/dx).  A mechanism that never occurs
// counts as a failure.
module tb_lightnorm_accel;
  import fp_ref_pkg::*;
  import ln_ref_pkg::*;
  import lightnorm_pkg::*;
  localparam int L = 32, R = 32, NB = 8, N = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic dram_we = 0, dram_re = 0;
  buf_sel_e dram_wsel = SEL_IBUF;
  logic [AW-1:0] dram_waddr = '0, dram_raddr = '0;
  logic [BUS-1:0] dram_wdata = '0, dram_rdata;
  logic acmd_valid = 0, acmd_ready, acmd_done;
  accel_cmd_t acmd = '0;
  logic [3:0] ln_log2_b = 4'd4;
  logic [23:0] ln_n_elems = 24'(N);
  fp10a_t ln_inv_n_a;
  fp10b_t ln_inv_n_b, ln_eps_b;
  fp10a_t [L-1:0] ln_gamma_a, ln_beta_a, ln_bw_mu, ln_bw_sigma, ln_bw_xmax, ln_bw_xmin;
  fp10b_t [L-1:0] ln_gamma_b;
  logic ln_cfg_error, ln_busy, ln_a_done, ln_b_done, ln_s_done, ln_stat_valid;
  fp10a_t [L-1:0] ln_mu, ln_sigma, ln_xmax, ln_xmin;

  lightnorm_accel dut (.*);
  always #5 clk = ~clk;

  // host-side view of a read word
  logic [7:0][3:0][9:0] ua, ub;
  for (genvar k = 0; k < 8; k++) begin : g_u
    bfp_unpack #(.EW(5), .MW(4)) u_a (.g(dram_rdata[k*25 +: 25]), .x(ua[k]));
    bfp_unpack #(.EW(6), .MW(3)) u_b (.g(dram_rdata[k*22 +: 22]), .x(ub[k]));
  end

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h at %0t", what, got, exp_w, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference helpers ----------------
  logic [7:0] W [R][L];

  function automatic void gemm(input logic [BUS-1:0] a, output real s[L]);
    logic [63:0] p;
    for (int c = 0; c < L; c++) begin
      p = '0;
      for (int r = 0; r < R; r++)
        p = from_real(to_real(p, 8, 23) + to_real(64'(a[8*r +: 8]), 5, 2) * to_real(64'(W[r][c]), 5, 2), 8, 23);
      s[c] = to_real(p, 8, 23);
    end
  endfunction

  // value of a word after block-floating-point storage (groups of 4 lanes)
  function automatic void bfp_rt(input w10_t q[L], input int ew, input int mw, output w10_t o[L]);
    int bias, es, e;
    real step, v, mag, t;
    bias = (1 << (ew - 1)) - 1;
    for (int k = 0; k < L / 4; k++) begin
      es = 0;
      for (int i = 0; i < 4; i++) begin
        e = int'((q[4*k+i] >> mw) & ((1 << ew) - 1));
        if (e > es) es = e;
      end
      step = 2.0 ** (es - bias - (mw - 1));
      for (int i = 0; i < 4; i++) begin
        v   = to_real(64'(q[4*k+i]), ew, mw);
        mag = (v < 0.0) ? -v : v;
        t   = $floor(mag / step) * step;
        if (t < 2.0 ** (1 - bias)) o[4*k+i] = '0;
        else o[4*k+i] = w10_t'(from_real((v < 0.0) ? -t : t, ew, mw));
      end
    end
  endfunction

  // ---------------- host tasks ----------------
  task automatic hwrite(input buf_sel_e sel, input int addr, input logic [BUS-1:0] d);
    @(negedge clk);
    dram_we = 1; dram_wsel = sel; dram_waddr = AW'(addr); dram_wdata = d;
    @(negedge clk);
    dram_we = 0;
  endtask

  task automatic hread(input int addr);
    @(negedge clk);
    dram_re = 1; dram_raddr = AW'(addr);
    @(negedge clk);
    dram_re = 0;
  endtask

  int n_done = 0;
  always @(posedge clk) if (rst_n && acmd_done) n_done++;

  task automatic issue(input accel_op_e op, input bit start, input int src, input int src2,
                       input int dst, input int count);
    @(negedge clk);
    acmd_valid = 1;
    acmd = '{op: op, ln_start: start, src: AW'(src), src2: AW'(src2), dst: AW'(dst), count: (AW+1)'(count)};
    @(posedge clk);
    while (!acmd_ready) @(posedge clk);
    #1 acmd_valid = 0;
  endtask

  task automatic wait_idle(input int n_cmds);
    while (n_done < n_cmds) @(posedge clk);
    @(negedge clk);
  endtask

  // ---------------- mechanism counters ----------------
  int m_stall = 0, m_overlap = 0, m_span = 0, m_switch = 0, m_two_reads = 0, m_trunc = 0, m_minmax = 0;
  int n_adone = 0;
  logic last_bw = 0;
  fp10a_t [L-1:0] cap_mu[2], cap_sigma[2], cap_xmax[2], cap_xmin[2];
  always @(posedge clk) if (rst_n) begin
    if (acmd_valid && !acmd_ready) m_stall++;
    if (dut.u_ln.u_ctrl.a_st != 0 && dut.u_ln.u_ctrl.b_run) m_overlap++;
    if (acmd_done && (dut.u_ln.u_ctrl.a_st != 0 || dut.u_ln.u_ctrl.b_run)) m_span++;
    if (dut.ob_re && dut.st == 2 && dut.c_q.op == AC_NORM_BW && dut.ph) m_two_reads++;
    if (ln_a_done) begin
      if (n_adone > 0 && dut.u_ln.u_ctrl.a_is_bw != last_bw) m_switch++;
      last_bw = dut.u_ln.u_ctrl.a_is_bw;
      if (n_adone < 2) begin
        cap_mu[n_adone] = ln_mu; cap_sigma[n_adone] = ln_sigma;
        cap_xmax[n_adone] = ln_xmax; cap_xmin[n_adone] = ln_xmin;
      end
      n_adone++;
    end
  end

  fp10b_t [L-1:0] dx_seen[$];
  always @(posedge clk) if (rst_n && dut.ln_dx_valid) dx_seen.push_back(dut.ln_dx);

  // ---------------- stimulus and checks ----------------
  logic [BUS-1:0] actw [48];
  w10_t xq [2][N][L], xr [2][N][L], yq [N][L], dyq [N][L], dyr [N][L], dxq [N][L];

  initial begin
    real s[L];
    w10_t q[L], o[L], emu, esg, emx, emn, k0, k1, mean, term;
    w10_t xsb[$], dys[$];
    ln_inv_n_a = wa(1.0 / real'(N));
    ln_inv_n_b = wb(1.0 / real'(N));
    ln_eps_b   = wb(1.0e-5);
    for (int l = 0; l < L; l++) begin
      ln_gamma_a[l] = 10'(rand_word(5, 4, 14, 15)) & 10'h1FF;
      ln_beta_a[l]  = 10'(rand_word(5, 4, 10, 14));
      ln_gamma_b[l] = a2b(ln_gamma_a[l]);
    end
    ln_bw_mu = '0; ln_bw_sigma = '0; ln_bw_xmax = '0; ln_bw_xmin = '0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < L; c++) W[r][c] = 8'(rand_word(5, 2, 12, 16));
    for (int i = 0; i < 48; i++) begin
      actw[i] = '0;
      for (int r = 0; r < R; r++) actw[i][8*r +: 8] = 8'(rand_word(5, 2, (i < 32) ? 12 : 9, (i < 32) ? 17 : 13));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    check("cfg ok", 64'(ln_cfg_error), 64'd0);

    // fill the buffers
    for (int r = 0; r < R; r++) begin
      logic [BUS-1:0] d = '0;
      for (int c = 0; c < L; c++) d[8*c +: 8] = W[r][c];
      hwrite(SEL_WBUF, r, d);
    end
    for (int i = 0; i < 48; i++) hwrite(SEL_IBUF, i, actw[i]);

    // reference: forward GEMM outputs of both groups, their stored values, stats
    for (int g = 0; g < 2; g++)
      for (int i = 0; i < N; i++) begin
        gemm(actw[16*g + i], s);
        for (int l = 0; l < L; l++) q[l] = w10_t'(from_real(s[l], 5, 4));
        bfp_rt(q, 5, 4, o);
        for (int l = 0; l < L; l++) begin
          xq[g][i][l] = q[l]; xr[g][i][l] = o[l];
          if (o[l] != q[l]) m_trunc++;
        end
      end

    // forward pass
    issue(AC_LOAD_W, 0, 0, 0, 0, 0);
    issue(AC_GEMM_FW, 1, 0, 0, 0, NB);
    issue(AC_GEMM_FW, 0, NB, 0, NB, NB);
    wait_idle(3);
    repeat (8) @(posedge clk);
    check("stat pass 1 done", 64'(n_adone), 64'd1);
    ln_bw_mu = cap_mu[0]; ln_bw_sigma = cap_sigma[0]; ln_bw_xmax = cap_xmax[0]; ln_bw_xmin = cap_xmin[0];
    issue(AC_NORM_FW, 1, 0, 0, 100, NB);
    issue(AC_GEMM_FW, 1, 16, 0, 200, NB);
    issue(AC_NORM_FW, 0, NB, 0, 100 + NB, NB);
    issue(AC_GEMM_FW, 0, 16 + NB, 0, 200 + NB, NB);
    wait_idle(7);
    repeat (8) @(posedge clk);
    check("stat pass 2 done", 64'(n_adone), 64'd2);

    // backward pass: coefficients, dL/dy, dL/dx
    issue(AC_SCALAR, 0, 0, 0, 0, 0);
    issue(AC_GEMM_BW, 1, 32, 0, 300, NB);
    issue(AC_GEMM_BW, 0, 32 + NB, NB, 300 + NB, NB);
    issue(AC_NORM_BW, 1, 0, 300, 400, NB);
    issue(AC_NORM_BW, 0, NB, 300 + NB, 400 + NB, NB);
    wait_idle(12);

    // reference for the remaining steps
    for (int l = 0; l < L; l++) begin
      w10_t xs[$];
      xs = {};
      for (int i = 0; i < N; i++) xs.push_back(xq[0][i][l]);
      fw_stat(xs, ln_inv_n_a, 10'h0DB, emu, esg, emx, emn);
      check("mu 1", 64'(cap_mu[0][l]), 64'(emu));
      check("sigma 1", 64'(cap_sigma[0][l]), 64'(esg));
      check("xmax 1", 64'(cap_xmax[0][l]), 64'(emx));
      check("xmin 1", 64'(cap_xmin[0][l]), 64'(emn));
      for (int i = 0; i < N; i++) yq[i][l] = fw_y(xr[0][i][l], emu, esg, ln_gamma_a[l], ln_beta_a[l]);
      xs = {};
      for (int i = 0; i < N; i++) xs.push_back(xq[1][i][l]);
      fw_stat(xs, ln_inv_n_a, 10'h0DB, emu, esg, emx, emn);
      check("mu 2", 64'(cap_mu[1][l]), 64'(emu));
      check("sigma 2", 64'(cap_sigma[1][l]), 64'(esg));
      check("xmax 2", 64'(cap_xmax[1][l]), 64'(emx));
      check("xmin 2", 64'(cap_xmin[1][l]), 64'(emn));
    end
    for (int i = 0; i < N; i++) begin
      gemm(actw[32 + i], s);
      for (int l = 0; l < L; l++) q[l] = w10_t'(from_real(s[l], 6, 3));
      bfp_rt(q, 6, 3, o);
      for (int l = 0; l < L; l++) begin dyq[i][l] = q[l]; dyr[i][l] = o[l]; end
    end
    for (int l = 0; l < L; l++) begin
      scalar(a2b(ln_bw_sigma[l]), ln_gamma_b[l], 10'h0EE, ln_eps_b, k0, k1);
      check("k0", 64'(dut.u_ln.k0_q[l]), 64'(k0));
      check("k1", 64'(dut.u_ln.k1_q[l]), 64'(k1));
      xsb = {}; dys = {};
      for (int i = 0; i < N; i++) begin xsb.push_back(a2b(xr[0][i][l])); dys.push_back(dyq[i][l]); end
      bw_acc(xsb, dys, a2b(ln_bw_mu[l]), ln_inv_n_b, k1, mean, term);
      for (int i = 0; i < N; i++) begin
        dxq[i][l] = bw_dx(xsb[i], dyr[i][l], mean, k0, term, a2b(ln_bw_xmin[l]), a2b(ln_bw_xmax[l]));
        if (xsb[i] == a2b(ln_bw_xmin[l]) || xsb[i] == a2b(ln_bw_xmax[l])) m_minmax++;
      end
    end

    for (int i = 0; i < N; i++)
      for (int l = 0; l < L; l++) check("dx lane", 64'(dx_seen[i][l]), 64'(dxq[i][l]));
    // read back and compare every stored word
    for (int i = 0; i < N; i++) begin
      hread(i);
      for (int l = 0; l < L; l++) check("x stored", 64'(ua[l/4][l%4]), 64'(xr[0][i][l]));
      hread(200 + i);
      for (int l = 0; l < L; l++) check("x2 stored", 64'(ua[l/4][l%4]), 64'(xr[1][i][l]));
      hread(100 + i);
      for (int l = 0; l < L; l++) q[l] = yq[i][l];
      bfp_rt(q, 5, 4, o);
      for (int l = 0; l < L; l++) check("y stored", 64'(ua[l/4][l%4]), 64'(o[l]));
      hread(300 + i);
      for (int l = 0; l < L; l++) check("dy stored", 64'(ub[l/4][l%4]), 64'(dyr[i][l]));
      hread(400 + i);
      for (int l = 0; l < L; l++) q[l] = dxq[i][l];
      bfp_rt(q, 6, 3, o);
      for (int l = 0; l < L; l++) check("dx stored", 64'(ub[l/4][l%4]), 64'(o[l]));
    end
    check("commands done", 64'(n_done), 64'd12);
    check("cfg still ok", 64'(ln_cfg_error), 64'd0);

    $display("mechanisms: stall=%0d overlap=%0d span=%0d switch=%0d two_reads=%0d bfp_trunc=%0d minmax=%0d",
             m_stall, m_overlap, m_span, m_switch, m_two_reads, m_trunc, m_minmax);
    check("mech stall", 64'(m_stall > 0), 64'd1);
    check("mech overlap", 64'(m_overlap > 0), 64'd1);
    check("mech span", 64'(m_span > 0), 64'd1);
    check("mech switch", 64'(m_switch > 0), 64'd1);
    check("mech two reads", 64'(m_two_reads > 0), 64'd1);
    check("mech bfp trunc", 64'(m_trunc > 0), 64'd1);
    check("mech minmax", 64'(m_minmax > 0), 64'd1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
