// bfp_converter: quantizes the LANES FP32 outputs of the systolic array to an FP10
// format and packs them into block floating point for storage.
//
// Each beat (one output row of the array, one value per channel) is rounded to
// {1,EW,MW} (FP10-A for the forward converter, FP10-B for the backward one) and
// the quantized values are registered on `q`.  In the same cycle every GROUP
// neighbouring lanes are packed into one BFP group (bfp_pack); the LANES/GROUP
// groups are registered on `packed_q`, lane group 0 in the least significant bits.
// Latency is one cycle for both outputs (`out_valid`).  For 32 lanes of FP10-A
// that is 8 groups of 25 bits, 200 bits per beat.  Quantizing to FP10 and sharing
// exponents over groups of four is the design's; grouping neighbouring channels
// (rather than neighbouring elements of one channel) is this design's choice.
module bfp_converter #(
  parameter int unsigned LANES = lightnorm_pkg::LANES,
  parameter int unsigned EW    = lightnorm_pkg::FP10A_EW,
  parameter int unsigned MW    = lightnorm_pkg::FP10A_MW,
  parameter int unsigned GROUP = lightnorm_pkg::GROUP,
  localparam int unsigned GW   = EW + GROUP * (1 + MW),
  localparam int unsigned NG   = LANES / GROUP
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  lightnorm_pkg::fp32_t [LANES-1:0] in,
  output logic                          out_valid,
  output logic [LANES-1:0][EW+MW:0]     q,
  output logic [NG-1:0][GW-1:0]         packed_q
);
  logic [LANES-1:0][EW+MW:0] qd;
  logic [NG-1:0][GW-1:0]     pd;

  for (genvar l = 0; l < LANES; l++) begin : g_q
    fp_convert #(.EWI(lightnorm_pkg::FP32_EW), .MWI(lightnorm_pkg::FP32_MW), .EWO(EW), .MWO(MW))
      u_cvt (.a(in[l]), .y(qd[l]));
  end

  for (genvar k = 0; k < NG; k++) begin : g_pack
    bfp_pack #(.EW(EW), .MW(MW), .GROUP(GROUP)) u_pack (
      .x(qd[k*GROUP +: GROUP]), .g(pd[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      q         <= '0;
      packed_q  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        q        <= qd;
        packed_q <= pd;
      end
    end
  end

  initial assert (LANES % GROUP == 0) else $error("LANES must be a multiple of GROUP");
endmodule
