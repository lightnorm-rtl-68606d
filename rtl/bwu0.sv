// bwu0: backward-pass unit for the numerator term of one channel (FP10-B).
//
// Computes (dL/dx_i)_1 = k0 * ( (1/N) * sum(dL/dy) + dL/dy_i ), with
// k0 = -gamma/(sigma+eps) supplied by the scalar unit.
//
// Pass A streams dL/dy of the channel and accumulates it (FP10-B adder with a
// feedback register, loaded instead of added on `acc_first`).  The cycle after
// the beat flagged `acc_last` the sum is final; one cycle later mean = sum * 1/N
// is registered and `acc_done` pulses.  `load` copies that mean into the register
// pass B reads, so the next pass A can run while pass B still streams.
// Pass B streams dL/dy_i again: add the mean, register, multiply by k0, register;
// `out_valid` is `in_valid` delayed by 2 cycles.  The operator chain is the one of
// the backward-unit drawing; the first/last/load controls are this design's own.
module bwu0 #(
  parameter int unsigned EW = lightnorm_pkg::FP10B_EW,
  parameter int unsigned MW = lightnorm_pkg::FP10B_MW
) (
  input  logic           clk,
  input  logic           rst_n,
  // pass A
  input  logic           acc_valid,
  input  logic           acc_first,
  input  logic           acc_last,
  input  logic [EW+MW:0] acc_dy,
  input  logic [EW+MW:0] inv_n,
  output logic           acc_done,
  // pass B
  input  logic           load,
  input  logic           in_valid,
  input  logic [EW+MW:0] dy,
  input  logic [EW+MW:0] k0,
  output logic           out_valid,
  output logic [EW+MW:0] g1
);
  localparam int W = EW + MW + 1;

  logic [W-1:0] acc_q, sum_d, mean_d, mean_q, mean_use;
  logic [W-1:0] s1_d, s1_q, g_d, g_q;
  logic         l1, l2;
  logic [1:0]   v_q;

  fp_add #(.EW(EW), .MW(MW)) u_acc (.a(acc_q), .b(acc_dy), .sub(1'b0), .y(sum_d));
  fp_mul #(.EWI(EW), .MWI(MW), .EWO(EW), .MWO(MW)) u_mean (.a(acc_q), .b(inv_n), .y(mean_d));
  fp_add #(.EW(EW), .MW(MW)) u_add (.a(mean_use), .b(dy), .sub(1'b0), .y(s1_d));
  fp_mul #(.EWI(EW), .MWI(MW), .EWO(EW), .MWO(MW)) u_k0 (.a(s1_q), .b(k0), .y(g_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0; mean_q <= '0; mean_use <= '0;
      l1 <= 1'b0; l2 <= 1'b0;
      s1_q <= '0; g_q <= '0; v_q <= '0;
    end else begin
      if (acc_valid) acc_q <= acc_first ? acc_dy : sum_d;
      l1 <= acc_valid & acc_last;
      l2 <= l1;
      if (l1)   mean_q   <= mean_d;
      if (load) mean_use <= mean_q;
      s1_q <= s1_d;
      g_q  <= g_d;
      v_q  <= {v_q[0], in_valid};
    end
  end

  assign acc_done  = l2;
  assign out_valid = v_q[1];
  assign g1        = g_q;
endmodule
