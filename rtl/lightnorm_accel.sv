// lightnorm_accel: on-device DNN training accelerator with LightNorm hardware.
//
// Data path: DRAM <-> three on-chip buffers (IBUF and WBUF 32 KB, OBUF 24 KB, all
// with 256-bit words) -> 32x32 systolic array (FP8 multiply, FP32 accumulate) ->
// forward and backward BFP converters (FP32 -> FP10, groups of four lanes share an
// exponent) -> LightNorm hardware (range batch normalization of 32 channels).
// Results of the array and of LightNorm are stored in the OBUF in BFP10, one
// 256-bit word per beat holding 8 groups (FP10-A: 200 bits, FP10-B: 176 bits).
//
// The host (which also plays DRAM) fills and drains the buffers through the
// dram_* port while the sequencer is idle, configures LightNorm through the ln_*
// ports, and issues accelerator commands (lightnorm_pkg::accel_cmd_t) on
// acmd_valid/acmd_ready; acmd_done pulses at the end of each:
//   AC_LOAD_W   32 WBUF words -> weight rows of the array
//   AC_GEMM_FW  `count` IBUF words (32 FP8 activations each) through the array;
//               each output row is quantized to FP10-A, fed to the forward
//               statistics pass (stream A) and stored as BFP10-A at OBUF[dst+k]
//   AC_GEMM_BW  as above for output gradients dL/dy in FP10-B; the stored x of the
//               forward pass (OBUF[src2+k]) is read alongside for stream A
//   AC_NORM_FW  OBUF[src+k] (BFP10-A x) -> normalization (stream B) -> y stored as
//               BFP10-A at OBUF[dst+k]
//   AC_NORM_BW  OBUF[src+k] (x) and OBUF[src2+k] (dL/dy) -> dL/dx stored as
//               BFP10-B at OBUF[dst+k]; the single OBUF read port takes two cycles
//               per beat here
//   AC_SCALAR   the scalar unit computes the backward coefficients of all lanes
// With `ln_start` set a GEMM or NORM command also starts the matching LightNorm
// pass of ln_n_elems beats; a pass may span several commands, so a channel can
// hold more elements than a buffer.  The blocks, sizes, bus widths and
// precisions are those of the design's proposed accelerator; the command set, the
// sequencer and the buffer addressing are this design's own.
// Lint note: the assertions use rst_n in `disable iff`, so a linter reports rst_n
// as used both synchronously and asynchronously; the flip-flops use it only as an
// asynchronous reset.
// The ln_start bit of the registered command is not used after the command is
// taken (it is acted on from the command port), so it is reported unused.
module lightnorm_accel #(
  parameter int unsigned ROWS  = 32,
  parameter int unsigned LANES = lightnorm_pkg::LANES,
  parameter int unsigned CW    = 24
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // host / DRAM side of the buffers
  input  logic                                dram_we,
  input  lightnorm_pkg::buf_sel_e             dram_wsel,
  input  logic [lightnorm_pkg::AW-1:0]        dram_waddr,
  input  logic [lightnorm_pkg::BUS-1:0]       dram_wdata,
  input  logic                                dram_re,
  input  logic [lightnorm_pkg::AW-1:0]        dram_raddr,
  output logic [lightnorm_pkg::BUS-1:0]       dram_rdata,
  // accelerator commands
  input  logic                                acmd_valid,
  output logic                                acmd_ready,
  input  lightnorm_pkg::accel_cmd_t           acmd,
  output logic                                acmd_done,
  // LightNorm configuration, parameters and status
  input  logic [3:0]                          ln_log2_b,
  input  logic [CW-1:0]                       ln_n_elems,
  input  lightnorm_pkg::fp10a_t               ln_inv_n_a,
  input  lightnorm_pkg::fp10b_t               ln_inv_n_b,
  input  lightnorm_pkg::fp10b_t               ln_eps_b,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   ln_gamma_a,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   ln_beta_a,
  input  lightnorm_pkg::fp10b_t [LANES-1:0]   ln_gamma_b,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   ln_bw_mu,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   ln_bw_sigma,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   ln_bw_xmax,
  input  lightnorm_pkg::fp10a_t [LANES-1:0]   ln_bw_xmin,
  output logic                                ln_cfg_error,
  output logic                                ln_busy,
  output logic                                ln_a_done,
  output logic                                ln_b_done,
  output logic                                ln_s_done,
  output logic                                ln_stat_valid,
  output lightnorm_pkg::fp10a_t [LANES-1:0]   ln_mu,
  output lightnorm_pkg::fp10a_t [LANES-1:0]   ln_sigma,
  output lightnorm_pkg::fp10a_t [LANES-1:0]   ln_xmax,
  output lightnorm_pkg::fp10a_t [LANES-1:0]   ln_xmin
);
  import lightnorm_pkg::*;
  localparam int NG  = LANES / GROUP;
  localparam int GWA = BFP_A_W;
  localparam int GWB = BFP_B_W;

  // ---------------- buffers ----------------
  logic          ib_re, wb_re, ob_re, ob_we;
  logic [AW-1:0] ib_raddr, wb_raddr, ob_raddr, ob_waddr;
  logic [BUS-1:0] ib_rdata, wb_rdata, ob_rdata, ob_wdata;

  buffer_sram #(.WIDTH(BUS), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .wr_en(dram_we && dram_wsel == SEL_IBUF), .wr_addr(dram_waddr), .wr_data(dram_wdata),
    .rd_en(ib_re), .rd_addr(ib_raddr), .rd_data(ib_rdata)
  );
  buffer_sram #(.WIDTH(BUS), .DEPTH(WBUF_DEPTH)) u_wbuf (
    .clk, .wr_en(dram_we && dram_wsel == SEL_WBUF), .wr_addr(dram_waddr), .wr_data(dram_wdata),
    .rd_en(wb_re), .rd_addr(wb_raddr), .rd_data(wb_rdata)
  );
  buffer_sram #(.WIDTH(BUS), .DEPTH(OBUF_DEPTH)) u_obuf (
    .clk, .wr_en(ob_we), .wr_addr(ob_waddr), .wr_data(ob_wdata),
    .rd_en(ob_re), .rd_addr(ob_raddr), .rd_data(ob_rdata)
  );
  assign dram_rdata = ob_rdata;

  // ---------------- sequencer ----------------
  typedef enum logic [1:0] {ST_IDLE, ST_LNCMD, ST_RUN, ST_DRAIN} st_e;
  st_e        st;
  accel_cmd_t c_q;
  logic [AW:0] rd_k, wr_k;
  logic        ph;                 // AC_NORM_BW: 0 = read x, 1 = read dL/dy
  logic        rv1, ph1;           // a read issued last cycle (and its phase)
  logic [$clog2(ROWS)-1:0] rk1;

  logic   ln_cmd_valid, ln_cmd_ready;
  ln_op_e ln_cmd_op;
  logic   ln_b_valid, ln_a_valid;
  fp10a_t [LANES-1:0] ln_a_x, ln_b_x, ln_y;
  fp10b_t [LANES-1:0] ln_a_dy, ln_b_dy, ln_dx;
  logic   ln_y_valid, ln_dx_valid;

  logic [AW:0] n_reads;
  always_comb begin
    n_reads = (c_q.op == AC_LOAD_W) ? (AW+1)'(ROWS) : c_q.count;
    unique case (c_q.op)
      AC_GEMM_FW: ln_cmd_op = OP_FW_STAT;
      AC_GEMM_BW: ln_cmd_op = OP_BW_ACC;
      AC_NORM_FW: ln_cmd_op = OP_FW_NORM;
      AC_NORM_BW: ln_cmd_op = OP_BW_OUT;
      AC_SCALAR:  ln_cmd_op = OP_SCALAR;
      default:    ln_cmd_op = OP_IDLE;
    endcase
  end
  assign ln_cmd_valid = (st == ST_LNCMD);
  assign acmd_ready   = (st == ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= ST_IDLE; c_q <= '0; rd_k <= '0; ph <= 1'b0;
      rv1 <= 1'b0; ph1 <= 1'b0; rk1 <= '0; acmd_done <= 1'b0;
    end else begin
      acmd_done <= 1'b0;
      rv1 <= 1'b0;
      unique case (st)
        ST_IDLE: if (acmd_valid) begin
          c_q  <= acmd;
          rd_k <= '0;
          ph   <= 1'b0;
          if (acmd.op == AC_SCALAR || (acmd.ln_start && acmd.op != AC_LOAD_W)) st <= ST_LNCMD;
          else st <= ST_RUN;
        end
        ST_LNCMD: if (ln_cmd_ready) st <= (c_q.op == AC_SCALAR) ? ST_DRAIN : ST_RUN;
        ST_RUN: begin
          rv1 <= 1'b1;
          ph1 <= ph;
          rk1 <= rd_k[$clog2(ROWS)-1:0];
          if (c_q.op == AC_NORM_BW) ph <= ~ph;
          if (c_q.op != AC_NORM_BW || ph) begin
            rd_k <= rd_k + 1'b1;
            if (rd_k == n_reads - 1'b1) st <= ST_DRAIN;
          end
        end
        ST_DRAIN: begin
          unique case (c_q.op)
            AC_LOAD_W: if (!rv1) begin st <= ST_IDLE; acmd_done <= 1'b1; end
            AC_SCALAR: if (ln_s_done) begin st <= ST_IDLE; acmd_done <= 1'b1; end
            default:   if (wr_k == c_q.count) begin st <= ST_IDLE; acmd_done <= 1'b1; end
          endcase
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  wire run_rd = (st == ST_RUN);
  assign wb_re    = run_rd && c_q.op == AC_LOAD_W;
  assign wb_raddr = c_q.src + rd_k[AW-1:0];
  assign ib_re    = run_rd && (c_q.op == AC_GEMM_FW || c_q.op == AC_GEMM_BW);
  assign ib_raddr = c_q.src + rd_k[AW-1:0];

  // ---------------- systolic array ----------------
  logic  sa_out_valid;
  fp32_t [LANES-1:0] sa_out;

  systolic_array #(.ROWS(ROWS), .COLS(LANES)) u_sa (
    .clk, .rst_n,
    .w_we(rv1 && c_q.op == AC_LOAD_W), .w_row(rk1), .w_data(wb_rdata[8*LANES-1:0]),
    .in_valid(rv1 && (c_q.op == AC_GEMM_FW || c_q.op == AC_GEMM_BW)),
    .act(ib_rdata[8*ROWS-1:0]),
    .out_valid(sa_out_valid), .out(sa_out)
  );

  // ---------------- BFP converters ----------------
  logic cva, cvb;
  fp10a_t [LANES-1:0] qa;
  fp10b_t [LANES-1:0] qb;
  logic [NG-1:0][GWA-1:0] pka;
  logic [NG-1:0][GWB-1:0] pkb;

  bfp_converter #(.LANES(LANES), .EW(FP10A_EW), .MW(FP10A_MW)) u_cvt_fw (
    .clk, .rst_n, .in_valid(sa_out_valid && c_q.op == AC_GEMM_FW), .in(sa_out),
    .out_valid(cva), .q(qa), .packed_q(pka)
  );
  bfp_converter #(.LANES(LANES), .EW(FP10B_EW), .MW(FP10B_MW)) u_cvt_bw (
    .clk, .rst_n, .in_valid(sa_out_valid && c_q.op == AC_GEMM_BW), .in(sa_out),
    .out_valid(cvb), .q(qb), .packed_q(pkb)
  );

  // ---------------- OBUF read data back into FP10 ----------------
  fp10a_t [LANES-1:0] ob_xa;
  fp10b_t [LANES-1:0] ob_db;
  for (genvar k = 0; k < NG; k++) begin : g_unpack
    bfp_unpack #(.EW(FP10A_EW), .MW(FP10A_MW)) u_ua (.g(ob_rdata[k*GWA +: GWA]), .x(ob_xa[k*GROUP +: GROUP]));
    bfp_unpack #(.EW(FP10B_EW), .MW(FP10B_MW)) u_ub (.g(ob_rdata[k*GWB +: GWB]), .x(ob_db[k*GROUP +: GROUP]));
  end

  // ---------------- LightNorm outputs back into BFP ----------------
  logic [NG-1:0][GWA-1:0] pya;
  logic [NG-1:0][GWB-1:0] pdx;
  for (genvar k = 0; k < NG; k++) begin : g_pack
    bfp_pack #(.EW(FP10A_EW), .MW(FP10A_MW)) u_py (.x(ln_y[k*GROUP +: GROUP]),  .g(pya[k]));
    bfp_pack #(.EW(FP10B_EW), .MW(FP10B_MW)) u_pd (.x(ln_dx[k*GROUP +: GROUP]), .g(pdx[k]));
  end

  // ---------------- write side and stream alignment ----------------
  fp10a_t [LANES-1:0] x_hold;
  fp10b_t [LANES-1:0] dy_d;
  logic               gbw_v;          // AC_GEMM_BW: dL/dy registered, x being read

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_k <= '0; x_hold <= '0; dy_d <= '0; gbw_v <= 1'b0;
    end else begin
      if (st == ST_IDLE) wr_k <= '0;
      else if (ob_we)    wr_k <= wr_k + 1'b1;
      gbw_v <= cvb;
      if (cvb) dy_d <= qb;
      if (rv1 && c_q.op == AC_NORM_BW && !ph1) x_hold <= ob_xa;
    end
  end

  always_comb begin
    ob_we    = 1'b0;
    ob_wdata = '0;
    unique case (c_q.op)
      AC_GEMM_FW: begin ob_we = cva;         ob_wdata = BUS'(pka); end
      AC_GEMM_BW: begin ob_we = cvb;         ob_wdata = BUS'(pkb); end
      AC_NORM_FW: begin ob_we = ln_y_valid;  ob_wdata = BUS'(pya); end
      AC_NORM_BW: begin ob_we = ln_dx_valid; ob_wdata = BUS'(pdx); end
      default: ;
    endcase
    if (st == ST_IDLE) begin
      ob_we    = dram_we && dram_wsel == SEL_OBUF;
      ob_wdata = dram_wdata;
    end
    ob_waddr = (st == ST_IDLE) ? dram_waddr : c_q.dst + wr_k[AW-1:0];

    // OBUF read: host when idle, the sequencer for NORM, the write side for GEMM_BW
    ob_re    = 1'b0;
    ob_raddr = '0;
    if (st == ST_IDLE) begin
      ob_re = dram_re; ob_raddr = dram_raddr;
    end else if (c_q.op == AC_GEMM_BW) begin
      ob_re = cvb; ob_raddr = c_q.src2 + wr_k[AW-1:0];
    end else if (c_q.op == AC_NORM_FW) begin
      ob_re = run_rd; ob_raddr = c_q.src + rd_k[AW-1:0];
    end else if (c_q.op == AC_NORM_BW) begin
      ob_re = run_rd; ob_raddr = (ph ? c_q.src2 : c_q.src) + rd_k[AW-1:0];
    end

    // LightNorm streams
    ln_a_valid = 1'b0;
    ln_a_x     = qa;
    ln_a_dy    = dy_d;
    if (c_q.op == AC_GEMM_FW) ln_a_valid = cva;
    if (c_q.op == AC_GEMM_BW) begin
      ln_a_valid = gbw_v;
      ln_a_x     = ob_xa;
    end
    ln_b_valid = rv1 && (c_q.op == AC_NORM_FW || (c_q.op == AC_NORM_BW && ph1));
    ln_b_x     = (c_q.op == AC_NORM_BW) ? x_hold : ob_xa;
    ln_b_dy    = ob_db;
  end

  // ---------------- LightNorm hardware ----------------
  lightnorm #(.LANES(LANES), .CW(CW)) u_ln (
    .clk, .rst_n,
    .log2_b(ln_log2_b), .n_elems(ln_n_elems), .inv_n_a(ln_inv_n_a), .inv_n_b(ln_inv_n_b),
    .eps_b(ln_eps_b), .cfg_error(ln_cfg_error),
    .gamma_a(ln_gamma_a), .beta_a(ln_beta_a), .gamma_b(ln_gamma_b),
    .bw_mu(ln_bw_mu), .bw_sigma(ln_bw_sigma), .bw_xmax(ln_bw_xmax), .bw_xmin(ln_bw_xmin),
    .cmd_valid(ln_cmd_valid), .cmd_ready(ln_cmd_ready), .cmd_op(ln_cmd_op),
    .a_done(ln_a_done), .b_done(ln_b_done), .s_done(ln_s_done), .busy(ln_busy),
    .a_valid(ln_a_valid), .a_x(ln_a_x), .a_dy(ln_a_dy),
    .b_valid(ln_b_valid), .b_x(ln_b_x), .b_dy(ln_b_dy),
    .stat_valid(ln_stat_valid), .mu(ln_mu), .sigma(ln_sigma), .xmax(ln_xmax), .xmin(ln_xmin),
    .y_valid(ln_y_valid), .y(ln_y), .dx_valid(ln_dx_valid), .dx(ln_dx)
  );

  // the host may only use the buffers while the sequencer is idle
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) (dram_we || dram_re) |-> st == ST_IDLE);
endmodule
