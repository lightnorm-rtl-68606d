// fw_module: the forward-pass module, LANES fw_blocks side by side (FP10-A).
//
// One block per output channel; each column of the systolic array feeds one lane,
// so all LANES channels are normalized in lock step with shared control (valid,
// first, last, load) and shared 1/N and C(B).  gamma and beta are per lane.
// Latencies are those of fw_block: statistics 3 cycles after the last beat,
// normalized outputs 4 cycles after their inputs.  32 lanes is the design's
// number.
// Lint note: the assertions use rst_n in `disable iff`, so a linter reports rst_n
// as used both synchronously and asynchronously; the flip-flops use it only as an
// asynchronous reset.
module fw_module #(
  parameter int unsigned LANES = lightnorm_pkg::LANES,
  parameter int unsigned EW    = lightnorm_pkg::FP10A_EW,
  parameter int unsigned MW    = lightnorm_pkg::FP10A_MW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      s_valid,
  input  logic                      s_first,
  input  logic                      s_last,
  input  logic [LANES-1:0][EW+MW:0] s_x,
  input  logic [EW+MW:0]            inv_n,
  input  logic [EW+MW:0]            cb,
  output logic                      stat_valid,
  output logic [LANES-1:0][EW+MW:0] mu,
  output logic [LANES-1:0][EW+MW:0] sigma,
  output logic [LANES-1:0][EW+MW:0] xmax,
  output logic [LANES-1:0][EW+MW:0] xmin,
  input  logic                      n_load,
  input  logic                      n_valid,
  input  logic [LANES-1:0][EW+MW:0] n_x,
  input  logic [LANES-1:0][EW+MW:0] gamma,
  input  logic [LANES-1:0][EW+MW:0] beta,
  output logic                      y_valid,
  output logic [LANES-1:0][EW+MW:0] y
);
  logic [LANES-1:0] sv, yv;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fw_block #(.EW(EW), .MW(MW)) u_blk (
      .clk, .rst_n, .s_valid, .s_first, .s_last, .s_x(s_x[l]), .inv_n, .cb,
      .stat_valid(sv[l]), .mu(mu[l]), .sigma(sigma[l]), .xmax(xmax[l]), .xmin(xmin[l]),
      .n_load, .n_valid, .n_x(n_x[l]), .gamma(gamma[l]), .beta(beta[l]),
      .y_valid(yv[l]), .y(y[l])
    );
  end

  // all lanes share control, so lane 0 speaks for all
  assign stat_valid = sv[0];
  assign y_valid    = yv[0];

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (sv == '0 || sv == '1) && (yv == '0 || yv == '1));
endmodule
