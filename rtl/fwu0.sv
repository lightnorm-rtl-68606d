// fwu0: forward-pass statistics unit of one channel (FP10-A).
//
// Streams x_i of one channel, one element per cycle.  Three running registers are
// updated on each beat: the sum of x (through the FP10-A adder), the largest and
// the smallest x.  On the first beat of a pass they are loaded with x instead.  Two
// cycles after the beat flagged `in_last`, mu = sum * (1/N) and the range
// (xmax - xmin) are registered; one cycle later sigma = C(B) * range is, and
// `stat_valid` pulses for one cycle.  mu, sigma, xmax and xmin then hold until the
// next pass ends.
//
// Timing: last beat in cycle t -> sum/max/min registered at t+1 -> mu and range at
// t+2 -> sigma at t+3 with stat_valid high in that cycle (mu is delayed one more
// register so that both leave together).  The structure (accumulator, max and min
// units, subtractor, two multipliers, one register after each) follows the
// forward-unit drawing of the design; the first/last flags, the held outputs and
// the extra register on mu are this design's own.
module fwu0 #(
  parameter int unsigned EW = lightnorm_pkg::FP10A_EW,
  parameter int unsigned MW = lightnorm_pkg::FP10A_MW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           in_first,
  input  logic           in_last,
  input  logic [EW+MW:0] x,
  input  logic [EW+MW:0] inv_n,     // 1/N, N = elements per channel
  input  logic [EW+MW:0] cb,        // C(B) from the lookup table
  output logic           stat_valid,
  output logic [EW+MW:0] mu,
  output logic [EW+MW:0] sigma,
  output logic [EW+MW:0] xmax,
  output logic [EW+MW:0] xmin
);
  localparam int W = EW + MW + 1;

  // signed ordering key of a sign-magnitude word
  function automatic logic signed [W:0] key(input logic [W-1:0] v);
    logic signed [W:0] m;
    m = {2'b00, v[W-2:0]};
    return v[W-1] ? -m : m;
  endfunction

  logic [W-1:0] acc_q, max_q, min_q, sum_d;
  logic [W-1:0] mu_s2, range_s2, mu_s3, sigma_s3;
  logic [W-1:0] mu_d, range_d, sigma_d;
  logic         l1, l2, l3;

  fp_add #(.EW(EW), .MW(MW)) u_acc (.a(acc_q), .b(x), .sub(1'b0), .y(sum_d));
  fp_mul #(.EWI(EW), .MWI(MW), .EWO(EW), .MWO(MW)) u_mean (.a(acc_q), .b(inv_n), .y(mu_d));
  fp_add #(.EW(EW), .MW(MW)) u_range (.a(max_q), .b(min_q), .sub(1'b1), .y(range_d));
  fp_mul #(.EWI(EW), .MWI(MW), .EWO(EW), .MWO(MW)) u_sig (.a(range_s2), .b(cb), .y(sigma_d));

  // accumulator, max unit, min unit
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0;
      max_q <= '0;
      min_q <= '0;
    end else if (in_valid) begin
      if (in_first) begin
        acc_q <= x;
        max_q <= x;
        min_q <= x;
      end else begin
        acc_q <= sum_d;
        if (key(x) > key(max_q)) max_q <= x;
        if (key(x) < key(min_q)) min_q <= x;
      end
    end
  end

  // statistics pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1 <= 1'b0; l2 <= 1'b0; l3 <= 1'b0;
      mu_s2 <= '0; range_s2 <= '0; mu_s3 <= '0; sigma_s3 <= '0;
      xmax <= '0; xmin <= '0;
    end else begin
      l1 <= in_valid & in_last;
      l2 <= l1;
      l3 <= l2;
      if (l1) begin
        mu_s2    <= mu_d;
        range_s2 <= range_d;
        xmax     <= max_q;
        xmin     <= min_q;
      end
      if (l2) begin
        mu_s3    <= mu_s2;
        sigma_s3 <= sigma_d;
      end
    end
  end

  assign stat_valid = l3;
  assign mu         = mu_s3;
  assign sigma      = sigma_s3;
endmodule
