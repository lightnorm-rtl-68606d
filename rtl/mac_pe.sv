// mac_pe: one multiply-accumulate cell of the weight-stationary systolic array.
//
// Holds one FP8 {1,5,2} weight (written when w_we is high).  Each cycle it
// registers the FP8 activation arriving from the left and passes it to the right,
// and registers psum_out = psum_in + act * w, where the product is formed exactly
// in FP32 and the sum is an FP32 {1,8,23} addition rounded to nearest-even.  One
// cycle from inputs to both outputs.  FP8 multiplication with FP32 accumulation is
// the design's precision for the array of the proposed accelerator; the
// weight-stationary dataflow is this design's choice (the design says the array is
// TPU-like, with activations moving along rows and partial sums down columns).
module mac_pe (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  w_we,
  input  lightnorm_pkg::fp8_t   w_in,
  input  lightnorm_pkg::fp8_t   act_in,
  input  lightnorm_pkg::fp32_t  psum_in,
  output lightnorm_pkg::fp8_t   act_out,
  output lightnorm_pkg::fp32_t  psum_out
);
  import lightnorm_pkg::*;

  fp8_t  w_q;
  fp32_t prod, sum;

  fp_mul #(.EWI(FP8_EW), .MWI(FP8_MW), .EWO(FP32_EW), .MWO(FP32_MW)) u_mul (
    .a(act_in), .b(w_q), .y(prod)
  );
  fp_add #(.EW(FP32_EW), .MW(FP32_MW)) u_add (.a(psum_in), .b(prod), .sub(1'b0), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= '0;
      act_out  <= '0;
      psum_out <= '0;
    end else begin
      if (w_we) w_q <= w_in;
      act_out  <= act_in;
      psum_out <= sum;
    end
  end
endmodule
