// lightnorm_pkg: formats and constants shared by the LightNorm batch-normalization
// hardware and the training accelerator around it.
//
// Every floating-point word is packed as {sign, exponent, fraction} with an implicit
// leading one and an IEEE-style bias of 2^(EW-1)-1.  An exponent field of zero encodes
// zero (no subnormals), and results that overflow saturate to the largest finite value,
// so the usable ranges are those of the format table of the design: FP10-A {1,5,4}
// spans +/-[6.1035e-5, 6.3488e4], FP10-B {1,6,3} spans +/-[9.3132e-10, 4.0265e9].
// The forward pass works in FP10-A, the backward pass in FP10-B, the systolic array
// multiplies in FP8 {1,5,2} and accumulates in FP32 {1,8,23}.  Values are stored to
// memory in block floating point (BFP): four values share the largest exponent.
package lightnorm_pkg;

  // number formats {sign, exponent bits, mantissa bits}
  localparam int unsigned FP10A_EW = 5;
  localparam int unsigned FP10A_MW = 4;
  localparam int unsigned FP10B_EW = 6;
  localparam int unsigned FP10B_MW = 3;
  localparam int unsigned FP8_EW   = 5;
  localparam int unsigned FP8_MW   = 2;
  localparam int unsigned FP32_EW  = 8;
  localparam int unsigned FP32_MW  = 23;

  typedef logic [9:0]  fp10a_t;
  typedef logic [9:0]  fp10b_t;
  typedef logic [7:0]  fp8_t;
  typedef logic [31:0] fp32_t;

  // channels handled in parallel = columns of the systolic array
  localparam int unsigned LANES = 32;
  // BFP group size (values sharing one exponent)
  localparam int unsigned GROUP = 4;

  // width of one BFP group: GROUP*(sign+mantissa) + shared exponent
  localparam int unsigned BFP_A_W = GROUP * (1 + FP10A_MW) + FP10A_EW;  // 25
  localparam int unsigned BFP_B_W = GROUP * (1 + FP10B_MW) + FP10B_EW;  // 22

  // operations sequenced by the LightNorm control unit
  typedef enum logic [2:0] {
    OP_IDLE    = 3'd0,
    OP_FW_STAT = 3'd1,   // stream x: accumulate sum, max, min (FWU0)
    OP_FW_NORM = 3'd2,   // stream x: y = gamma*(x-mu)/sigma + beta (FWU1)
    OP_SCALAR  = 3'd3,   // compute the two per-channel backward coefficients
    OP_BW_ACC  = 3'd4,   // stream (x, dL/dy): accumulate sums (BWU0, BWU1)
    OP_BW_OUT  = 3'd5    // stream (x, dL/dy): produce dL/dx
  } ln_op_e;

  // training accelerator: on-chip buffers (words of BUS bits)
  localparam int unsigned BUS        = 256;
  localparam int unsigned IBUF_DEPTH = 1024;   // 32 KB
  localparam int unsigned WBUF_DEPTH = 1024;   // 32 KB
  localparam int unsigned OBUF_DEPTH = 768;    // 24 KB
  localparam int unsigned AW         = 10;     // buffer address width

  // commands of the accelerator sequencer
  typedef enum logic [2:0] {
    AC_LOAD_W  = 3'd0,   // WBUF[src +: ROWS] -> weights of the systolic array
    AC_GEMM_FW = 3'd1,   // IBUF[src +: count] -> array -> FP10-A/BFP -> OBUF[dst..], stream A
    AC_GEMM_BW = 3'd2,   // IBUF[src +: count] -> array -> dL/dy FP10-B/BFP -> OBUF[dst..];
                         //   x from OBUF[src2..] joins it on stream A
    AC_NORM_FW = 3'd3,   // OBUF[src..] x -> stream B -> y (BFP10-A) -> OBUF[dst..]
    AC_NORM_BW = 3'd4,   // OBUF[src..] x and OBUF[src2..] dL/dy -> stream B -> dx -> OBUF[dst..]
    AC_SCALAR  = 3'd5    // backward coefficients of all lanes
  } accel_op_e;

  typedef struct packed {
    accel_op_e   op;
    logic        ln_start;   // also start the matching LightNorm pass
    logic [AW-1:0] src;
    logic [AW-1:0] src2;
    logic [AW-1:0] dst;
    logic [AW:0]   count;    // beats (vectors); 1..1024
  } accel_cmd_t;

  // which buffer a host/DRAM transfer addresses
  typedef enum logic [1:0] {SEL_IBUF = 2'd0, SEL_WBUF = 2'd1, SEL_OBUF = 2'd2} buf_sel_e;

endpackage
