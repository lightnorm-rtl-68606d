// ln_control: control unit of the LightNorm hardware.
//
// Runs three independent sequencers, each started by a command on a valid/ready
// handshake (cmd_op, see lightnorm_pkg::ln_op_e):
//  - A, statistics passes (OP_FW_STAT, OP_BW_ACC): counts the beats of stream A
//    and marks the first and the N-th (`n_elems`) beat; after the N-th beat it
//    waits for the units' completion flag (`a_unit_done`) and pulses `a_done`.
//  - B, output passes (OP_FW_NORM, OP_BW_OUT): pulses `b_load` in the cycle the command
//    is taken (the units copy their statistics then), passes stream-B beats, and
//    pulses `b_done` once N results have left the units (`b_unit_out`).
//  - S, coefficients (OP_SCALAR): hands the LANES channels to the scalar unit in
//    turn and raises `k_we` with the lane index for each result; pulses `s_done`.
// A command is accepted when its sequencer is idle; an output pass also waits until
// no statistics pass is open, so that it always loads finished statistics.  A
// statistics pass of the next group of channels may start while the output pass
// of the current one runs, so the two overlap.  Beats
// arriving while a sequencer is idle are ignored.  The design names a control unit
// but does not describe it; this one is the simplest that sequences the passes.
// Lint note: the assertions use rst_n in `disable iff`, so a linter reports rst_n
// as used both synchronously and asynchronously; the flip-flops use it only as an
// asynchronous reset.
module ln_control #(
  parameter int unsigned LANES = lightnorm_pkg::LANES,
  parameter int unsigned CW    = 24
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  lightnorm_pkg::ln_op_e    cmd_op,
  input  logic [CW-1:0]            n_elems,
  // sequencer A
  input  logic                     a_in_valid,
  input  logic                     a_unit_done,
  output logic                     a_beat,
  output logic                     a_first,
  output logic                     a_last,
  output logic                     a_is_bw,
  output logic                     a_done,
  // sequencer B
  input  logic                     b_in_valid,
  input  logic                     b_unit_out,
  output logic                     b_load,
  output logic                     b_beat,
  output logic                     b_is_bw,
  output logic                     b_done,
  // sequencer S and the scalar unit
  output logic                     sc_req_valid,
  input  logic                     sc_req_ready,
  input  logic                     sc_resp_valid,
  output logic [$clog2(LANES)-1:0] sc_lane,
  output logic                     k_we,
  output logic                     s_done,
  output logic                     busy
);
  import lightnorm_pkg::*;

  typedef enum logic [1:0] {A_IDLE, A_RUN, A_WAIT} a_state_e;
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} s_state_e;

  a_state_e      a_st;
  logic          b_run;
  s_state_e      s_st;
  logic [CW-1:0] a_cnt, b_in_cnt, b_out_cnt;
  logic          take_a, take_b, take_s;

  always_comb begin
    unique case (cmd_op)
      OP_FW_STAT, OP_BW_ACC: cmd_ready = (a_st == A_IDLE);
      OP_FW_NORM, OP_BW_OUT: cmd_ready = !b_run && (a_st == A_IDLE);
      OP_SCALAR:             cmd_ready = (s_st == S_IDLE);
      default:               cmd_ready = 1'b1;      // OP_IDLE is a no-op
    endcase
    take_a = cmd_valid && cmd_ready && (cmd_op == OP_FW_STAT || cmd_op == OP_BW_ACC);
    take_b = cmd_valid && cmd_ready && (cmd_op == OP_FW_NORM || cmd_op == OP_BW_OUT);
    take_s = cmd_valid && cmd_ready && (cmd_op == OP_SCALAR);
  end

  // ---------------- sequencer A ----------------
  assign a_beat  = (a_st == A_RUN) && a_in_valid;
  assign a_first = a_beat && (a_cnt == '0);
  assign a_last  = a_beat && (a_cnt == n_elems - CW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_st <= A_IDLE; a_cnt <= '0; a_is_bw <= 1'b0; a_done <= 1'b0;
    end else begin
      a_done <= 1'b0;
      unique case (a_st)
        A_IDLE: if (take_a) begin
          a_st    <= A_RUN;
          a_cnt   <= '0;
          a_is_bw <= (cmd_op == OP_BW_ACC);
        end
        A_RUN: if (a_beat) begin
          a_cnt <= a_cnt + CW'(1);
          if (a_last) a_st <= A_WAIT;
        end
        A_WAIT: if (a_unit_done) begin
          a_done <= 1'b1;
          a_st   <= A_IDLE;
        end
        default: a_st <= A_IDLE;
      endcase
    end
  end

  // ---------------- sequencer B ----------------
  // b_load is combinational so the units hold the new statistics from the edge that
  // takes the command; the first beat may arrive in the very next cycle.
  assign b_load = take_b;
  assign b_beat = b_run && b_in_valid && (b_in_cnt != n_elems);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_run <= 1'b0; b_in_cnt <= '0; b_out_cnt <= '0; b_is_bw <= 1'b0;
      b_done <= 1'b0;
    end else begin
      b_done <= 1'b0;
      if (take_b) begin
        b_run     <= 1'b1;
        b_in_cnt  <= '0;
        b_out_cnt <= '0;
        b_is_bw   <= (cmd_op == OP_BW_OUT);
      end else if (b_run) begin
        if (b_beat) b_in_cnt <= b_in_cnt + CW'(1);
        if (b_unit_out) begin
          b_out_cnt <= b_out_cnt + CW'(1);
          if (b_out_cnt == n_elems - CW'(1)) begin
            b_run  <= 1'b0;
            b_done <= 1'b1;
          end
        end
      end
    end
  end

  // ---------------- sequencer S ----------------
  assign sc_req_valid = (s_st == S_REQ);
  assign k_we         = (s_st == S_WAIT) && sc_resp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_st <= S_IDLE; sc_lane <= '0; s_done <= 1'b0;
    end else begin
      s_done <= 1'b0;
      unique case (s_st)
        S_IDLE: if (take_s) begin
          s_st    <= S_REQ;
          sc_lane <= '0;
        end
        S_REQ:  if (sc_req_ready) s_st <= S_WAIT;
        S_WAIT: if (sc_resp_valid) begin
          if (sc_lane == ($clog2(LANES))'(LANES - 1)) begin
            s_st   <= S_IDLE;
            s_done <= 1'b1;
          end else begin
            sc_lane <= sc_lane + 1'b1;
            s_st    <= S_REQ;
          end
        end
        default: s_st <= S_IDLE;
      endcase
    end
  end

  assign busy = (a_st != A_IDLE) || b_run || (s_st != S_IDLE);

  // a pass needs at least one element
  a_n_nonzero: assert property (@(posedge clk) disable iff (!rst_n) take_a || take_b |-> n_elems != '0);
  // the handshake holds the command until it is taken
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_op));
endmodule
