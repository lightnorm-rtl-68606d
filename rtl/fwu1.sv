// fwu1: forward-pass normalization unit of one channel (FP10-A).
//
// y_i = gamma * (x_i - mu) / sigma + beta, as a four-stage pipeline with one
// FP10-A operator per stage: subtract, divide, multiply, add.  It accepts one
// element per cycle; y leaves 4 cycles after x enters (`out_valid` is `in_valid`
// delayed by 4).  mu and sigma come from fwu0 of the same channel, gamma and beta
// are the trainable parameters of the channel; all four must stay constant while a
// pass streams.  The stage order follows the drawing of the forward unit; no
// epsilon is added to sigma, as in the range-normalization formula.
module fwu1 #(
  parameter int unsigned EW = lightnorm_pkg::FP10A_EW,
  parameter int unsigned MW = lightnorm_pkg::FP10A_MW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [EW+MW:0] x,
  input  logic [EW+MW:0] mu,
  input  logic [EW+MW:0] sigma,
  input  logic [EW+MW:0] gamma,
  input  logic [EW+MW:0] beta,
  output logic           out_valid,
  output logic [EW+MW:0] y
);
  localparam int W = EW + MW + 1;

  logic [W-1:0] d_q, xh_q, p_q, y_q;
  logic [W-1:0] d_d, xh_d, p_d, y_d;
  logic [3:0]   v_q;

  fp_add #(.EW(EW), .MW(MW)) u_sub (.a(x), .b(mu), .sub(1'b1), .y(d_d));
  fp_div #(.EW(EW), .MW(MW)) u_div (.a(d_q), .b(sigma), .y(xh_d));
  fp_mul #(.EWI(EW), .MWI(MW), .EWO(EW), .MWO(MW)) u_mul (.a(xh_q), .b(gamma), .y(p_d));
  fp_add #(.EW(EW), .MW(MW)) u_add (.a(p_q), .b(beta), .sub(1'b0), .y(y_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '0;
      d_q <= '0; xh_q <= '0; p_q <= '0; y_q <= '0;
    end else begin
      v_q  <= {v_q[2:0], in_valid};
      d_q  <= d_d;
      xh_q <= xh_d;
      p_q  <= p_d;
      y_q  <= y_d;
    end
  end

  assign out_valid = v_q[3];
  assign y         = y_q;
endmodule
