// bw_module: the backward-pass module, LANES bw_blocks side by side (FP10-B).
//
// One block per channel with shared stream control and 1/N; mu, xmax, xmin and
// the two coefficients from the scalar unit are per lane.  Latencies are those of
// bw_block: pass A is done 5 cycles after its last beat, dx leaves 3 cycles after
// its inputs.  32 lanes is the design's number.
// Lint note: the assertions use rst_n in `disable iff`, so a linter reports rst_n
// as used both synchronously and asynchronously; the flip-flops use it only as an
// asynchronous reset.
module bw_module #(
  parameter int unsigned LANES = lightnorm_pkg::LANES,
  parameter int unsigned EW    = lightnorm_pkg::FP10B_EW,
  parameter int unsigned MW    = lightnorm_pkg::FP10B_MW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [LANES-1:0][EW+MW:0] mu,
  input  logic [LANES-1:0][EW+MW:0] xmax,
  input  logic [LANES-1:0][EW+MW:0] xmin,
  input  logic [EW+MW:0]            inv_n,
  input  logic [LANES-1:0][EW+MW:0] k0,
  input  logic [LANES-1:0][EW+MW:0] k1,
  input  logic                      a_valid,
  input  logic                      a_first,
  input  logic                      a_last,
  input  logic [LANES-1:0][EW+MW:0] a_x,
  input  logic [LANES-1:0][EW+MW:0] a_dy,
  output logic                      acc_done,
  input  logic                      b_load,
  input  logic                      b_valid,
  input  logic [LANES-1:0][EW+MW:0] b_x,
  input  logic [LANES-1:0][EW+MW:0] b_dy,
  output logic                      dx_valid,
  output logic [LANES-1:0][EW+MW:0] dx
);
  logic [LANES-1:0] ad, dv;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    bw_block #(.EW(EW), .MW(MW)) u_blk (
      .clk, .rst_n, .mu(mu[l]), .xmax(xmax[l]), .xmin(xmin[l]), .inv_n, .k0(k0[l]), .k1(k1[l]),
      .a_valid, .a_first, .a_last, .a_x(a_x[l]), .a_dy(a_dy[l]), .acc_done(ad[l]),
      .b_load, .b_valid, .b_x(b_x[l]), .b_dy(b_dy[l]), .dx_valid(dv[l]), .dx(dx[l])
    );
  end

  assign acc_done = ad[0];
  assign dx_valid = dv[0];

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (ad == '0 || ad == '1) && (dv == '0 || dv == '1));
endmodule
