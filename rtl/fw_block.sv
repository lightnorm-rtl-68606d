// fw_block: forward-pass block of one channel: fwu0 followed by fwu1 (FP10-A).
//
// The statistics stream (s_*) feeds fwu0, which produces mu, sigma, xmax and xmin
// of the channel 3 cycles after its last beat.  `n_load` copies mu and sigma into
// the registers fwu1 uses, after which the normalization stream (n_*) can run
// while fwu0 already gathers the statistics of the next group of channels: the
// two units form a two-stage pipeline at the granularity of a whole pass.  y leaves
// 4 cycles after n_x enters.  The pairing of the two units is the design's; the
// stat-hold registers that make the overlap safe are this design's own.
module fw_block #(
  parameter int unsigned EW = lightnorm_pkg::FP10A_EW,
  parameter int unsigned MW = lightnorm_pkg::FP10A_MW
) (
  input  logic           clk,
  input  logic           rst_n,
  // statistics pass (FWU0)
  input  logic           s_valid,
  input  logic           s_first,
  input  logic           s_last,
  input  logic [EW+MW:0] s_x,
  input  logic [EW+MW:0] inv_n,
  input  logic [EW+MW:0] cb,
  output logic           stat_valid,
  output logic [EW+MW:0] mu,
  output logic [EW+MW:0] sigma,
  output logic [EW+MW:0] xmax,
  output logic [EW+MW:0] xmin,
  // normalization pass (FWU1)
  input  logic           n_load,
  input  logic           n_valid,
  input  logic [EW+MW:0] n_x,
  input  logic [EW+MW:0] gamma,
  input  logic [EW+MW:0] beta,
  output logic           y_valid,
  output logic [EW+MW:0] y
);
  logic [EW+MW:0] mu_use, sigma_use;

  fwu0 #(.EW(EW), .MW(MW)) u_fwu0 (
    .clk, .rst_n, .in_valid(s_valid), .in_first(s_first), .in_last(s_last), .x(s_x),
    .inv_n, .cb, .stat_valid, .mu, .sigma, .xmax, .xmin
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu_use    <= '0;
      sigma_use <= '0;
    end else if (n_load) begin
      mu_use    <= mu;
      sigma_use <= sigma;
    end
  end

  fwu1 #(.EW(EW), .MW(MW)) u_fwu1 (
    .clk, .rst_n, .in_valid(n_valid), .x(n_x), .mu(mu_use), .sigma(sigma_use),
    .gamma, .beta, .out_valid(y_valid), .y
  );
endmodule
