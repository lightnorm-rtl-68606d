// bw_block: backward-pass block of one channel: bwu0, bwu1 and the final adder
// (FP10-B).
//
// Pass A (a_*) streams (x_i, dL/dy_i) into both units at once; `acc_done` pulses
// when both have finished (5 cycles after the last beat, set by bwu1).  `b_load`
// copies their results into the registers pass B reads.  Pass B (b_*) streams
// (x_i, dL/dy_i) again: bwu0 forms (dL/dx_i)_1 in 2 cycles while x_i is compared
// with the channel's xmin and xmax; that select, delayed 2 cycles, drives bwu1's
// multiplexer, and the sum (dL/dx_i)_1 +/- (dL/dx)_2 is registered as dx:
// 3 cycles from b_x to dx.  An element equal to both extremes (a constant
// channel) is treated as the minimum.  The comparison that drives the
// multiplexer and the final adder are not drawn in the design's figures; they
// implement its rule that only the extremes receive the range term.
// Lint note: the assertions use rst_n in `disable iff`, so a linter reports rst_n
// as used both synchronously and asynchronously; the flip-flops use it only as an
// asynchronous reset.
module bw_block #(
  parameter int unsigned EW = lightnorm_pkg::FP10B_EW,
  parameter int unsigned MW = lightnorm_pkg::FP10B_MW
) (
  input  logic           clk,
  input  logic           rst_n,
  // per-channel constants
  input  logic [EW+MW:0] mu,
  input  logic [EW+MW:0] xmax,
  input  logic [EW+MW:0] xmin,
  input  logic [EW+MW:0] inv_n,
  input  logic [EW+MW:0] k0,
  input  logic [EW+MW:0] k1,
  // pass A
  input  logic           a_valid,
  input  logic           a_first,
  input  logic           a_last,
  input  logic [EW+MW:0] a_x,
  input  logic [EW+MW:0] a_dy,
  output logic           acc_done,
  // pass B
  input  logic           b_load,
  input  logic           b_valid,
  input  logic [EW+MW:0] b_x,
  input  logic [EW+MW:0] b_dy,
  output logic           dx_valid,
  output logic [EW+MW:0] dx
);
  logic           done0, done1, g1_valid;
  logic [EW+MW:0] g1, g2, sum_d, dx_q;
  logic [1:0]     sel_d, sel_q1, sel_q2;
  logic           dxv_q;

  bwu0 #(.EW(EW), .MW(MW)) u_bwu0 (
    .clk, .rst_n, .acc_valid(a_valid), .acc_first(a_first), .acc_last(a_last),
    .acc_dy(a_dy), .inv_n, .acc_done(done0), .load(b_load), .in_valid(b_valid),
    .dy(b_dy), .k0, .out_valid(g1_valid), .g1
  );

  bwu1 #(.EW(EW), .MW(MW)) u_bwu1 (
    .clk, .rst_n, .acc_valid(a_valid), .acc_first(a_first), .acc_last(a_last),
    .x(a_x), .dy(a_dy), .mu, .k1, .acc_done(done1), .load(b_load), .sel(sel_q2), .g2
  );

  // multiplexer control: which extreme of the channel is this element
  always_comb begin
    if (b_x == xmin)      sel_d = 2'b01;
    else if (b_x == xmax) sel_d = 2'b10;
    else                  sel_d = 2'b00;
  end

  fp_add #(.EW(EW), .MW(MW)) u_final (.a(g1), .b(g2), .sub(1'b0), .y(sum_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q1 <= '0; sel_q2 <= '0; dx_q <= '0; dxv_q <= 1'b0;
    end else begin
      sel_q1 <= sel_d;
      sel_q2 <= sel_q1;
      dx_q   <= sum_d;
      dxv_q  <= g1_valid;
    end
  end

  // bwu0 finishes 3 cycles before bwu1; done0 is only used by the assertion
  assign acc_done = done1;
  assign dx_valid = dxv_q;
  assign dx       = dx_q;

  // bwu0's mean is ready before bwu1's term
  property p_done_order;
    @(posedge clk) disable iff (!rst_n) done1 |-> $past(done0, 3);
  endproperty
  a_done_order: assert property (p_done_order);
endmodule
