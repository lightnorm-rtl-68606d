// bwu1: backward-pass unit for the range (denominator) term of one channel (FP10-B).
//
// Computes (dL/dx)_2 = k1 * sum( dL/dy_i * (x_i - mu) ), with
// k1 = sigma^(-3/2) * gamma * C(B) / 2 supplied by the scalar unit.  This term
// only reaches the elements that were the channel's extremes: it is added for
// x_i = xmin and subtracted for x_i = xmax; every other element gets nothing.
//
// Pass A streams (x_i, dL/dy_i): subtract mu, register; multiply by dL/dy_i
// (delayed one cycle to stay aligned), register; accumulate.  The sum is final 3
// cycles after the beat flagged `acc_last`; it is multiplied by k1 (register), and
// the result and its negation (the x(-1) branch, a sign flip) are registered.
// `acc_done` pulses when both are ready, 5 cycles after the last beat.  `load`
// copies them to the registers the output multiplexer reads.  In pass B the
// multiplexer picks +term, -term or zero by `sel`, combinationally.  The chain
// follows the backward-unit drawing; the zero input of the multiplexer (the
// drawing shows two inputs) and the load/first/last controls are this design's own.
module bwu1 #(
  parameter int unsigned EW = lightnorm_pkg::FP10B_EW,
  parameter int unsigned MW = lightnorm_pkg::FP10B_MW
) (
  input  logic           clk,
  input  logic           rst_n,
  // pass A
  input  logic           acc_valid,
  input  logic           acc_first,
  input  logic           acc_last,
  input  logic [EW+MW:0] x,
  input  logic [EW+MW:0] dy,
  input  logic [EW+MW:0] mu,
  input  logic [EW+MW:0] k1,
  output logic           acc_done,
  // pass B
  input  logic           load,
  input  logic [1:0]     sel,      // 2'b01: x_i is xmin (+), 2'b10: x_i is xmax (-), else 0
  output logic [EW+MW:0] g2
);
  localparam int W = EW + MW + 1;

  logic [W-1:0] t1_d, t1_q, dy_q, t2_d, t2_q, acc_q, sum_d, g_d, g_q;
  logic [W-1:0] pos_q, neg_q, pos_use, neg_use;
  logic [4:0]   lst;
  logic [1:0]   v_q, f_q;

  fp_add #(.EW(EW), .MW(MW)) u_sub (.a(x), .b(mu), .sub(1'b1), .y(t1_d));
  fp_mul #(.EWI(EW), .MWI(MW), .EWO(EW), .MWO(MW)) u_mul (.a(t1_q), .b(dy_q), .y(t2_d));
  fp_add #(.EW(EW), .MW(MW)) u_acc (.a(acc_q), .b(t2_q), .sub(1'b0), .y(sum_d));
  fp_mul #(.EWI(EW), .MWI(MW), .EWO(EW), .MWO(MW)) u_k1 (.a(acc_q), .b(k1), .y(g_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t1_q <= '0; dy_q <= '0; t2_q <= '0; acc_q <= '0; g_q <= '0;
      pos_q <= '0; neg_q <= '0; pos_use <= '0; neg_use <= '0;
      lst <= '0; v_q <= '0; f_q <= '0;
    end else begin
      t1_q <= t1_d;
      dy_q <= dy;
      t2_q <= t2_d;
      v_q  <= {v_q[0], acc_valid};
      f_q  <= {f_q[0], acc_first};
      lst  <= {lst[3:0], acc_valid & acc_last};
      if (v_q[1]) acc_q <= f_q[1] ? t2_q : sum_d;
      if (lst[2]) g_q <= g_d;
      if (lst[3]) begin
        pos_q <= g_q;
        neg_q <= (g_q == '0) ? '0 : {~g_q[W-1], g_q[W-2:0]};
      end
      if (load) begin
        pos_use <= pos_q;
        neg_use <= neg_q;
      end
    end
  end

  assign acc_done = lst[4];

  always_comb begin
    unique case (sel)
      2'b01:   g2 = pos_use;
      2'b10:   g2 = neg_use;
      default: g2 = '0;
    endcase
  end
endmodule
