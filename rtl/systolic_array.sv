// systolic_array: ROWS x COLS weight-stationary array of FP8/FP32 MAC cells.
//
// Computes out[c] = sum over r of act[r] * W[r][c] for one input vector per cycle,
// accumulating from row 0 downwards in FP32.  Weights are written one row per
// cycle (w_we, w_row, w_data).  Input row r is delayed r cycles before it enters
// the array so that its activation meets the partial sum coming down from row
// r-1; column c leaves the bottom row after ROWS+c cycles and is delayed by
// COLS-1-c more cycles, so all COLS results of a vector leave together
// ROWS+COLS-1 cycles after the vector entered (`out_valid` is `in_valid` delayed
// by as much).  Each column is one output channel and feeds one lane of the
// normalization hardware.  The 32x32 size is the design's; the dataflow, skew
// and deskew registers are this design's choices.
module systolic_array #(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 w_we,
  input  logic [$clog2(ROWS)-1:0]              w_row,
  input  lightnorm_pkg::fp8_t  [COLS-1:0]      w_data,
  input  logic                                 in_valid,
  input  lightnorm_pkg::fp8_t  [ROWS-1:0]      act,
  output logic                                 out_valid,
  output lightnorm_pkg::fp32_t [COLS-1:0]      out
);
  import lightnorm_pkg::*;
  localparam int LAT = ROWS + COLS - 1;

  fp8_t  [ROWS-1:0]       act_skew;
  fp8_t  [ROWS-1:0][COLS:0] a_h;      // activation entering cell (r,c) from the left
  fp32_t [ROWS:0][COLS-1:0] p_v;      // partial sum entering cell (r,c) from above

  // input skew: row r delayed by r cycles
  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    if (r == 0) begin : g_direct
      assign act_skew[r] = act[r];
    end else begin : g_delay
      fp8_t sr [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) sr[i] <= '0;
        end else begin
          sr[0] <= act[r];
          for (int i = 1; i < r; i++) sr[i] <= sr[i-1];
        end
      end
      assign act_skew[r] = sr[r-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_h[r][0] = act_skew[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      mac_pe u_pe (
        .clk, .rst_n,
        .w_we(w_we && (w_row == ($clog2(ROWS))'(r))), .w_in(w_data[c]),
        .act_in(a_h[r][c]), .psum_in(p_v[r][c]),
        .act_out(a_h[r][c+1]), .psum_out(p_v[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign p_v[0][c] = '0;
  end

  // output deskew: column c delayed by COLS-1-c cycles
  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    if (c == COLS - 1) begin : g_direct
      assign out[c] = p_v[ROWS][c];
    end else begin : g_delay
      fp32_t sr [COLS-1-c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < COLS - 1 - c; i++) sr[i] <= '0;
        end else begin
          sr[0] <= p_v[ROWS][c];
          for (int i = 1; i < COLS - 1 - c; i++) sr[i] <= sr[i-1];
        end
      end
      assign out[c] = sr[COLS-2-c];
    end
  end

  logic [LAT-1:0] v_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_sr <= '0;
    else        v_sr <= {v_sr[LAT-2:0], in_valid};
  end
  assign out_valid = v_sr[LAT-1];

  // activation leaving the last column is not used
  logic unused;
  always_comb begin
    unused = 1'b0;
    for (int r = 0; r < ROWS; r++) unused = unused ^ (^a_h[r][COLS]);
  end
endmodule
