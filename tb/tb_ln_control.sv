// tb_ln_control: exercises the three sequencers of the control unit with simple
// stand-ins for the units: checks the first/last marks of a statistics pass with
// gaps in the stream, that a_done waits for the unit's completion flag, that
// stream beats outside a pass are ignored, that b_done follows
// the N-th unit output, that a statistics pass may open during an output pass
// but an output pass waits for an open statistics pass, and
// that the scalar sequencer visits every lane once in order.
module tb_ln_control;
  import lightnorm_pkg::*;
  localparam int L = 32;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  ln_op_e cmd_op = OP_IDLE;
  logic [23:0] n_elems = 24'd10;
  logic a_in_valid = 0, a_unit_done = 0, a_beat, a_first, a_last, a_is_bw, a_done;
  logic b_in_valid = 0, b_unit_out = 0, b_load, b_beat, b_is_bw, b_done;
  logic sc_req_valid, sc_req_ready = 1, sc_resp_valid = 0, k_we, s_done, busy;
  logic [4:0] sc_lane;

  ln_control dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp_w);
    checks++;
    if (got != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp_w);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input ln_op_e op);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  // stand-in scalar unit: answers 3 cycles after each request
  int lanes_seen[$];
  always @(posedge clk) begin
    if (k_we) lanes_seen.push_back(int'(sc_lane));
  end
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && sc_req_valid && sc_req_ready) begin
        #1 sc_req_ready = 0;
        repeat (3) @(posedge clk);
        #1 sc_resp_valid = 1; sc_req_ready = 1;
        @(posedge clk);
        #1 sc_resp_valid = 0;
      end
    end
  end

  initial begin
    int beats, firsts, lasts, lat, outs;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // beats while idle are ignored
    @(negedge clk); a_in_valid = 1; #1;
    check("idle beat", 64'(a_beat), 64'd0);
    a_in_valid = 0;

    // ---- output pass, overlapped by the statistics pass of the next group ----
    issue(OP_FW_NORM);
    check("b mode fw", 64'(b_is_bw), 64'd0);
    issue(OP_FW_STAT);
    check("mode fw", 64'(a_is_bw), 64'd0);
    // an output pass is not taken while a statistics pass is open
    @(negedge clk); cmd_op = OP_BW_OUT; #1;
    check("output pass held", 64'(cmd_ready), 64'd0);
    beats = 0; firsts = 0; lasts = 0; outs = 0;
    fork
      begin
        while (beats < 10) begin
          @(negedge clk);
          a_in_valid = ($urandom_range(0, 2) != 0);
          #1;
          if (a_beat) begin
            beats++;
            if (a_first) begin firsts++; check("first at 0", 64'(beats), 64'd1); end
            if (a_last)  begin lasts++;  check("last at N", 64'(beats), 64'd10); end
          end
        end
        @(negedge clk);
        a_in_valid = 1; #1;
        check("beat after last ignored", 64'(a_beat), 64'd0);
        a_in_valid = 0;
        repeat (4) @(negedge clk);
        check("a_done waits", 64'(a_done), 64'd0);
        a_unit_done = 1;
        @(negedge clk);
        a_unit_done = 0;
        check("a_done", 64'(a_done), 64'd1);
      end
      begin
        for (int i = 0; i < 12; i++) begin
          @(negedge clk);
          b_in_valid = 1; #1;
          check("b beat", 64'(b_beat), 64'(i < 10));
        end
        b_in_valid = 0;
        for (int i = 0; i < 10; i++) begin
          @(negedge clk);
          b_unit_out = 1;
        end
        @(negedge clk);
        b_unit_out = 0;
        check("b_done", 64'(b_done), 64'd1);
      end
    join
    check("firsts", 64'(firsts), 64'd1);
    check("lasts", 64'(lasts), 64'd1);

    #1 check("output pass taken once stats done", 64'(cmd_ready), 64'd1);
    // ---- backward mode flags ----
    issue(OP_BW_ACC);
    check("mode bw", 64'(a_is_bw), 64'd1);
    for (int i = 0; i < 10; i++) begin @(negedge clk); a_in_valid = 1; end
    @(negedge clk); a_in_valid = 0; a_unit_done = 1;
    @(negedge clk); a_unit_done = 0;

    // ---- scalar sequencing ----
    issue(OP_SCALAR);
    lat = 0;
    while (!s_done && lat < 1000) begin @(negedge clk); lat++; end
    check("s_done", 64'(s_done), 64'd1);
    check("lanes", 64'(lanes_seen.size()), 64'(L));
    for (int i = 0; i < lanes_seen.size(); i++) check("lane order", 64'(lanes_seen[i]), 64'(i));
    @(negedge clk);
    check("idle", 64'(busy), 64'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
