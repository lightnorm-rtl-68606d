// lightnorm: the LightNorm batch-normalization hardware.
//
// Range batch normalization for LANES channels in parallel, one channel per column
// of the systolic array that produces the data:
//   forward   y = gamma * (x - mu) / sigma + beta,  sigma = C(B) * (max x - min x)
//   backward  dL/dx_i = k0 * (mean(dL/dy) + dL/dy_i)  [+ k1*S if x_i = min x]
//                                                      [- k1*S if x_i = max x]
//   with k0 = -gamma/(sigma+eps), k1 = sigma^(-3/2) gamma C(B)/2,
//   S = sum dL/dy_i (x_i - mu)
// The forward module works in FP10-A {1,5,4}, the backward module in FP10-B
// {1,6,3}.  Around them sit the scalar unit (k0, k1 per channel), the C(B) lookup
// table (selected by log2 of the mini-batch size) and the control unit.
//
// Use: issue commands on cmd_valid/cmd_ready (lightnorm_pkg::ln_op_e) and stream
// one element of every lane per beat:
//   OP_FW_STAT  stream A carries x (FP10-A); stat_valid then presents mu, sigma,
//               xmax, xmin of every lane, to be kept for the output pass and the
//               backward pass.
//   OP_FW_NORM  stream B carries the same x again; y (FP10-A) follows, 4 cycles
//               per beat.  Uses the statistics of the last completed OP_FW_STAT.
//   OP_SCALAR   computes k0 and k1 of all lanes from bw_sigma and gamma_b
//               (7 cycles per lane).
//   OP_BW_ACC   stream A carries x (FP10-A, as stored in the forward pass) and
//               dL/dy (FP10-B); uses bw_mu and the k1 of OP_SCALAR.
//   OP_BW_OUT   stream B carries x and dL/dy again; dx (FP10-B) follows 3 cycles
//               per beat.  Uses bw_xmax and bw_xmin.
// a_done, b_done and s_done pulse when a command has finished.  The forward
// statistics arrive in FP10-A and are converted to FP10-B for the backward module,
// as is x there.  The split into modules is the design's; the command set, the
// two streams and all interface details are this design's own.
// Lint note: the assertions of the sub-blocks use rst_n in `disable iff`, so a linter reports rst_n
// as used both synchronously and asynchronously; the flip-flops use it only as an
// asynchronous reset.
module lightnorm #(
  parameter int unsigned LANES = lightnorm_pkg::LANES,
  parameter int unsigned CW    = 24
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // configuration
  input  logic [3:0]                          log2_b,
  input  logic [CW-1:0]                       n_elems,
  input  lightnorm_pkg::fp10a_t               inv_n_a,
  input  lightnorm_pkg::fp10b_t               inv_n_b,
  input  lightnorm_pkg::fp10b_t               eps_b,
  output logic                                cfg_error,
  // per-channel parameters
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   gamma_a,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   beta_a,
  input  lightnorm_pkg::fp10b_t [LANES-1:0]   gamma_b,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   bw_mu,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   bw_sigma,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   bw_xmax,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   bw_xmin,
  // commands
  input  logic                                cmd_valid,
  output logic                                cmd_ready,
  input  lightnorm_pkg::ln_op_e               cmd_op,
  output logic                                a_done,
  output logic                                b_done,
  output logic                                s_done,
  output logic                                busy,
  // stream A (statistics passes)
  input  logic                                a_valid,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   a_x,
  input  lightnorm_pkg::fp10b_t [LANES-1:0]   a_dy,
  // stream B (output passes)
  input  logic                                b_valid,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   b_x,
  input  lightnorm_pkg::fp10b_t [LANES-1:0]   b_dy,
  // forward results
  output logic                                stat_valid,
  output lightnorm_pkg::fp10a_t [LANES-1:0]   mu,
  output lightnorm_pkg::fp10a_t [LANES-1:0]   sigma,
  output lightnorm_pkg::fp10a_t [LANES-1:0]   xmax,
  output lightnorm_pkg::fp10a_t [LANES-1:0]   xmin,
  output logic                                y_valid,
  output lightnorm_pkg::fp10a_t [LANES-1:0]   y,
  // backward results
  output logic                                dx_valid,
  output lightnorm_pkg::fp10b_t [LANES-1:0]   dx
);
  import lightnorm_pkg::*;
  localparam int LW = $clog2(LANES);

  // ---------------- lookup table ----------------
  logic   cb_ok;
  fp10a_t cb_a;
  fp10b_t cb_b;
  cb_lut u_lut (.log2_b, .valid(cb_ok), .cb_a, .cb_b);
  assign cfg_error = !cb_ok;

  // ---------------- control ----------------
  logic a_beat, a_first, a_last, a_is_bw, b_load, b_beat, b_is_bw;
  logic fw_stat_valid, bw_acc_done, fw_y_valid, bw_dx_valid;
  logic sc_req_valid, sc_req_ready, sc_resp_valid, k_we;
  logic [LW-1:0] sc_lane;

  ln_control #(.LANES(LANES), .CW(CW)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .n_elems,
    .a_in_valid(a_valid), .a_unit_done(a_is_bw ? bw_acc_done : fw_stat_valid),
    .a_beat, .a_first, .a_last, .a_is_bw, .a_done,
    .b_in_valid(b_valid), .b_unit_out(b_is_bw ? bw_dx_valid : fw_y_valid),
    .b_load, .b_beat, .b_is_bw, .b_done,
    .sc_req_valid, .sc_req_ready, .sc_resp_valid, .sc_lane, .k_we, .s_done, .busy
  );

  // ---------------- FP10-A -> FP10-B for the backward module ----------------
  fp10b_t [LANES-1:0] mu_b, sigma_b, xmax_b, xmin_b, ax_b, bx_b;
  for (genvar l = 0; l < LANES; l++) begin : g_cvt
    fp_convert #(.EWI(FP10A_EW), .MWI(FP10A_MW), .EWO(FP10B_EW), .MWO(FP10B_MW))
      u_mu (.a(bw_mu[l]),    .y(mu_b[l])),
      u_sg (.a(bw_sigma[l]), .y(sigma_b[l])),
      u_mx (.a(bw_xmax[l]),  .y(xmax_b[l])),
      u_mn (.a(bw_xmin[l]),  .y(xmin_b[l])),
      u_ax (.a(a_x[l]),      .y(ax_b[l])),
      u_bx (.a(b_x[l]),      .y(bx_b[l]));
  end

  // ---------------- scalar unit and coefficient registers ----------------
  fp10b_t             k0_s, k1_s;
  fp10b_t [LANES-1:0] k0_q, k1_q;

  scalar_unit u_scalar (
    .clk, .rst_n, .req_valid(sc_req_valid), .req_ready(sc_req_ready),
    .sigma(sigma_b[sc_lane]), .gamma(gamma_b[sc_lane]), .cb(cb_b), .eps(eps_b),
    .resp_valid(sc_resp_valid), .k0(k0_s), .k1(k1_s)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k0_q <= '0;
      k1_q <= '0;
    end else if (k_we) begin
      k0_q[sc_lane] <= k0_s;
      k1_q[sc_lane] <= k1_s;
    end
  end

  // ---------------- forward module ----------------
  fw_module #(.LANES(LANES)) u_fw (
    .clk, .rst_n,
    .s_valid(a_beat && !a_is_bw), .s_first(a_first), .s_last(a_last), .s_x(a_x),
    .inv_n(inv_n_a), .cb(cb_a),
    .stat_valid(fw_stat_valid), .mu, .sigma, .xmax, .xmin,
    .n_load(b_load && cmd_op == OP_FW_NORM), .n_valid(b_beat && !b_is_bw), .n_x(b_x),
    .gamma(gamma_a), .beta(beta_a), .y_valid(fw_y_valid), .y
  );

  // ---------------- backward module ----------------
  bw_module #(.LANES(LANES)) u_bw (
    .clk, .rst_n, .mu(mu_b), .xmax(xmax_b), .xmin(xmin_b), .inv_n(inv_n_b),
    .k0(k0_q), .k1(k1_q),
    .a_valid(a_beat && a_is_bw), .a_first(a_first), .a_last(a_last),
    .a_x(ax_b), .a_dy(a_dy), .acc_done(bw_acc_done),
    .b_load(b_load && cmd_op == OP_BW_OUT), .b_valid(b_beat && b_is_bw), .b_x(bx_b), .b_dy(b_dy),
    .dx_valid(bw_dx_valid), .dx
  );

  assign stat_valid = fw_stat_valid;
  assign y_valid    = fw_y_valid;
  assign dx_valid   = bw_dx_valid;
endmodule
