// scalar_unit: computes the two per-channel coefficients of the backward pass
// (FP10-B):
//   k0 = -gamma / (sigma + eps)
//   k1 = sigma^(-3/2) * gamma * C(B) / 2
// One channel at a time, with one FP10-B adder, multiplier, divider and square
// root shared over seven steps, one per cycle:
//   1 t  = sigma + eps          2 k0 = -(gamma / t)
//   3 r  = sqrt(sigma)          4 p  = sigma * r        (sigma^(3/2))
//   5 q  = gamma * C(B)         6 h  = q * 0.5
//   7 k1 = h / p
// Handshake: a request is taken when req_valid and req_ready are both high (its
// operands are registered then); resp_valid pulses with k0 and k1 in the eighth
// cycle after the request cycle (operand register plus seven steps), and k0/k1
// hold until the next response.  req_ready is high while idle.
// What the unit computes is the design's; the step order, the shared operators
// and the handshake are this design's own.
module scalar_unit #(
  parameter int unsigned EW = lightnorm_pkg::FP10B_EW,
  parameter int unsigned MW = lightnorm_pkg::FP10B_MW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  output logic           req_ready,
  input  logic [EW+MW:0] sigma,
  input  logic [EW+MW:0] gamma,
  input  logic [EW+MW:0] cb,
  input  logic [EW+MW:0] eps,
  output logic           resp_valid,
  output logic [EW+MW:0] k0,
  output logic [EW+MW:0] k1
);
  localparam int W = EW + MW + 1;
  localparam int BIAS = (1 << (EW - 1)) - 1;
  localparam logic [W-1:0] HALF = {1'b0, EW'(BIAS - 1), {MW{1'b0}}};

  typedef enum logic [2:0] {S_IDLE, S_T, S_K0, S_R, S_P, S_Q, S_H, S_K1} step_e;
  step_e step;

  logic [W-1:0] sig_q, gam_q, cb_q, eps_q, t_q, r_q, p_q, q_q, h_q;
  logic [W-1:0] add_y, mul_a, mul_b, mul_y, div_a, div_b, div_y, sqrt_y;

  always_comb begin
    mul_a = sig_q; mul_b = r_q;
    div_a = gam_q; div_b = t_q;
    unique case (step)
      S_Q:     begin mul_a = gam_q; mul_b = cb_q; end
      S_H:     begin mul_a = q_q;   mul_b = HALF; end
      default: begin mul_a = sig_q; mul_b = r_q;  end
    endcase
    if (step == S_K1) begin
      div_a = h_q; div_b = p_q;
    end
  end

  fp_add  #(.EW(EW), .MW(MW)) u_add (.a(sig_q), .b(eps_q), .sub(1'b0), .y(add_y));
  fp_mul  #(.EWI(EW), .MWI(MW), .EWO(EW), .MWO(MW)) u_mul (.a(mul_a), .b(mul_b), .y(mul_y));
  fp_div  #(.EW(EW), .MW(MW)) u_div (.a(div_a), .b(div_b), .y(div_y));
  fp_sqrt #(.EW(EW), .MW(MW)) u_sqrt (.a(sig_q), .y(sqrt_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step <= S_IDLE;
      sig_q <= '0; gam_q <= '0; cb_q <= '0; eps_q <= '0;
      t_q <= '0; r_q <= '0; p_q <= '0; q_q <= '0; h_q <= '0;
      k0 <= '0; k1 <= '0; resp_valid <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      unique case (step)
        S_IDLE: if (req_valid) begin
          sig_q <= sigma; gam_q <= gamma; cb_q <= cb; eps_q <= eps;
          step  <= S_T;
        end
        S_T:  begin t_q <= add_y; step <= S_K0; end
        S_K0: begin k0 <= (div_y == '0) ? '0 : {~div_y[W-1], div_y[W-2:0]}; step <= S_R; end
        S_R:  begin r_q <= sqrt_y; step <= S_P; end
        S_P:  begin p_q <= mul_y;  step <= S_Q; end
        S_Q:  begin q_q <= mul_y;  step <= S_H; end
        S_H:  begin h_q <= mul_y;  step <= S_K1; end
        S_K1: begin k1 <= div_y; resp_valid <= 1'b1; step <= S_IDLE; end
        default: step <= S_IDLE;
      endcase
    end
  end

  assign req_ready = (step == S_IDLE);
endmodule
