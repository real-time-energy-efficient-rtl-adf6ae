// mppi_top: MPPI (Model Predictive Path Integral) control accelerator for a
// kinematic-bicycle vehicle. Given the measured state x0 and a stored
// reference path, it runs MAX_ITERS sampling-based optimisation iterations
// over K noisy trajectories of N steps and outputs the first control of the
// improved sequence.
//
// Structure (dataflow, all stages overlapping where the data allows):
//   Stage 1  noise_gen      Gaussian noise, P pairs/clock, into noise_bram
//                           (P banks x 2 buffers); runs ahead of the rest.
//   Stage IV desired_state  nominal rollout + nearest reference waypoints.
//   Stage 2  rollout_stage  P lanes of pipelined bicycle dynamics.
//            sync_fifo      per-lane record FIFOs (REC_DEPTH).
//   Stage 3  stage_cost     per-lane quadratic costs, per-trajectory sums.
//            sync_fifo      per-lane cost FIFOs (JDEPTH).
//   Stage 4  control_update exponential weights, K-to-N weighted reduction,
//                           causal temporal smoothing of the update.
//   mppi_controller         initialisation, sequencing, actuator output.
// The noise memory read port is shared: rollouts use it during Stage 2,
// the control update during its reduction phase (the two never overlap).
//
// Interface: configuration (cfg) is quasi-static; waypoints load through
// wp_we/wp_addr/wp_data; `start` with x0 begins one control step; u_act is
// valid for one clock with u_act_valid. Status and event outputs expose the
// stage activity for monitoring.
module mppi_top
  import mppi_pkg::*;
#(
  parameter int K = 1024,
  parameter int N = 64,
  parameter int P = 4,
  parameter int G = 64,
  parameter int M = 256,
  parameter int MAX_ITERS = 1,
  parameter int REC_DEPTH = 64,
  parameter int JDEPTH = 64,
  parameter int SMOOTH_W = 4,
  parameter logic [31:0] SEED = 32'h2545F491,
  localparam int MW = $clog2(M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          wp_we,
  input  logic [MW-1:0] wp_addr,
  input  state_t        wp_data,
  input  logic          start,
  input  state_t        x0,
  output logic          busy,
  output logic          u_act_valid,
  output ctrl_t         u_act,
  // monitoring
  output logic          ng_busy,
  output logic          ro_busy,
  output logic          ro_stall,
  output logic          cu_busy,
  output logic [15:0]   iter,
  output cost_t         jmin,
  output fx_t           wsum
);
  localparam int J   = K / P;
  localparam int D   = J * N;
  localparam int AW  = $clog2(2 * D);
  localparam int TW  = $clog2(N);
  localparam int RCW = $clog2(REC_DEPTH) + 1;
  localparam int JCW = $clog2(JDEPTH) + 1;

  // controller
  state_t        x0_q;
  ctrl_t         u_nom [N];
  logic          ng_start, ng_wbuf, ng_done;
  logic          ds_start, ds_done, ds_busy_unused;
  logic          ro_start, cu_start, rbuf, cu_done, ro_done_unused;
  logic          u_we;
  logic [TW-1:0] u_wt;
  ctrl_t         u_wdata;

  mppi_controller #(.N(N), .MAX_ITERS(MAX_ITERS)) u_ctrl (
    .clk, .rst_n, .start, .x0_in(x0), .busy, .x0(x0_q), .u_nom,
    .u_act_valid, .u_act, .iter,
    .ng_start, .ng_wbuf, .ng_done, .ds_start, .ds_done,
    .ro_start, .cu_start, .rbuf, .cu_done, .u_we, .u_wt, .u_wdata);

  // Stage 1 and the noise memory
  logic [P-1:0]  nz_we;
  logic [AW-1:0] nz_waddr, nz_raddr, ro_raddr, cu_raddr;
  ctrl_t         nz_wdata [P];
  ctrl_t         nz_rdata [P];
  logic          cu_nz_own;

  noise_gen #(.K(K), .N(N), .P(P), .SEED(SEED)) u_ng (
    .clk, .rst_n, .start(ng_start), .wbuf(ng_wbuf),
    .sigma_steer(cfg.sigma_steer), .sigma_accel(cfg.sigma_accel),
    .busy(ng_busy), .done(ng_done),
    .wr_en(nz_we), .wr_addr(nz_waddr), .wr_data(nz_wdata));

  assign nz_raddr = cu_nz_own ? cu_raddr : ro_raddr;

  noise_bram #(.K(K), .N(N), .P(P)) u_nzmem (
    .clk, .wr_en(nz_we), .wr_addr(nz_waddr), .wr_data(nz_wdata),
    .rd_addr(nz_raddr), .rd_data(nz_rdata));

  // Stage IV
  state_t xref [N+1];
  desired_state #(.N(N), .M(M)) u_ds (
    .clk, .rst_n, .cfg, .wp_we, .wp_addr, .wp_data,
    .start(ds_start), .x0(x0_q), .u_nom, .busy(ds_busy_unused), .done(ds_done), .xref);

  // Stage 2
  logic          ro_valid;
  rec_t          ro_rec [P];
  logic [RCW-1:0] rf_count [P];

  rollout_stage #(.K(K), .N(N), .P(P), .G(G), .FIFO_DEPTH(REC_DEPTH)) u_ro (
    .clk, .rst_n, .cfg, .start(ro_start), .rbuf, .x0(x0_q), .u_nom,
    .nz_raddr(ro_raddr), .nz_rdata, .fifo_count(rf_count),
    .busy(ro_busy), .done(ro_done_unused), .stall(ro_stall),
    .out_valid(ro_valid), .out_rec(ro_rec));

  // Stage 3 per lane, with its FIFOs
  logic [P-1:0] jf_empty, jf_pop;
  jcost_t       jf_data [P];

  for (genvar p = 0; p < P; p++) begin : g_lane
    rec_t           rf_dout;
    logic           rf_empty, rf_pop, rf_full_unused, jf_full_unused;
    logic           j_push;
    jcost_t         j_data;
    logic [JCW-1:0] jf_count;

    sync_fifo #(.W($bits(rec_t)), .DEPTH(REC_DEPTH)) u_rf (
      .clk, .rst_n, .push(ro_valid), .din(ro_rec[p]), .pop(rf_pop),
      .dout(rf_dout), .empty(rf_empty), .full(rf_full_unused), .count(rf_count[p]));

    stage_cost #(.N(N), .G(G), .JDEPTH(JDEPTH)) u_cost (
      .clk, .rst_n, .cfg, .xref, .in_empty(rf_empty), .in_rec(rf_dout), .in_pop(rf_pop),
      .j_count(jf_count), .j_push, .j_data);

    sync_fifo #(.W($bits(jcost_t)), .DEPTH(JDEPTH)) u_jf (
      .clk, .rst_n, .push(j_push), .din(j_data), .pop(jf_pop[p]),
      .dout(jf_data[p]), .empty(jf_empty[p]), .full(jf_full_unused), .count(jf_count));
  end

  // Stage 4
  control_update #(.K(K), .N(N), .P(P), .SMOOTH_W(SMOOTH_W)) u_cu (
    .clk, .rst_n, .inv_lambda(cfg.inv_lambda), .start(cu_start), .rbuf,
    .j_empty(jf_empty), .j_data(jf_data), .j_pop(jf_pop),
    .nz_own(cu_nz_own), .nz_raddr(cu_raddr), .nz_rdata,
    .u_nom, .u_we, .u_wt, .u_wdata, .busy(cu_busy), .done(cu_done),
    .jmin_o(jmin), .wsum_o(wsum));
endmodule
