// tb_systolic_array: checks the 32x32 FP8/FP32 systolic array at its default size.
// Loads random FP8 weights row by row, streams random FP8 activation vectors with
// random gaps, and compares every output column with a reference that forms each
// column sum in row order with FP32 round-to-nearest-even after every addition
// (the order of the hardware).  Checks that out_valid follows in_valid by exactly
// ROWS+COLS-1 cycles and that a second weight set replaces the first.
module tb_systolic_array;
  import fp_ref_pkg::*;
  import lightnorm_pkg::*;
  parameter int R = 32, C = 32;
  localparam int LAT = R + C - 1;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [$clog2(R)-1:0] w_row = '0;
  fp8_t [C-1:0] w_data = '0;
  logic in_valid = 0, out_valid;
  fp8_t [R-1:0] act = '0;
  fp32_t [C-1:0] out;

  systolic_array #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp_w);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] W [R][C];
  fp32_t [C-1:0] expq[$];
  longint     tin[$];
  longint     cyc = 0;
  int         n_out = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    fp32_t [C-1:0] e;
    n_out++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      check("latency", 64'(cyc - tin.pop_front()), 64'(LAT));
      for (int c = 0; c < C; c++) check("out", 64'(out[c]), 64'(e[c]));
    end
  end

  task automatic load_weights();
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) W[r][c] = 8'(rand_word(5, 2, 10, 20));
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      w_we = 1; w_row = ($clog2(R))'(r);
      for (int c = 0; c < C; c++) w_data[c] = W[r][c];
    end
    @(negedge clk); w_we = 0;
  endtask

  task automatic stream(input int n);
    int sent;
    logic [63:0] p;
    fp32_t [C-1:0] e;
    sent = 0;
    while (sent < n) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int r = 0; r < R; r++) act[r] = 8'(rand_word(5, 2, 8, 22));
      if (in_valid) begin
        for (int c = 0; c < C; c++) begin
          p = '0;
          for (int r = 0; r < R; r++)
            p = from_real(to_real(p, 8, 23) + to_real(64'(act[r]), 5, 2) * to_real(64'(W[r][c]), 5, 2), 8, 23);
          e[c] = 32'(p);
        end
        expq.push_back(e);
        tin.push_back(cyc);
        sent++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights();
    stream(40);
    load_weights();
    stream(40);
    check("all outputs", 64'(n_out), 64'd80);
    check("queue empty", 64'(expq.size()), 64'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
