// tb_buffer_sram: checks one on-chip buffer at its default size (256 bits x 1024
// words, 32 KB) against an associative-array model: random writes and reads on the
// same cycles, a read returns its word one edge later, a read of an address being
// written in the same cycle returns the old word, and a read with rd_en low keeps
// the previous rd_data.
module tb_buffer_sram;
  localparam int W = 256, D = 1024, AW = $clog2(D);
  int checks = 0, failures = 0;

  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0] wr_data = '0, rd_data;

  buffer_sram #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic [W-1:0] got, input logic [W-1:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp_w);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rand_wide();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  logic [W-1:0] model [int];
  logic [W-1:0] expect_next, last_rd;
  logic         pend = 0;

  initial begin
    // fill every word once
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = rand_wide();
      model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    last_rd = '0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      if (pend) check("read", rd_data, expect_next);
      else if (i > 0) check("hold", rd_data, last_rd);
      last_rd = rd_data;
      wr_en = $urandom_range(0, 1) == 1;
      rd_en = $urandom_range(0, 3) != 0;
      wr_addr = AW'($urandom_range(0, D - 1));
      rd_addr = ($urandom_range(0, 3) == 0) ? wr_addr : AW'($urandom_range(0, D - 1));
      wr_data = rand_wide();
      pend = rd_en;
      if (rd_en) expect_next = model[int'(rd_addr)];
      if (wr_en) model[int'(wr_addr)] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
