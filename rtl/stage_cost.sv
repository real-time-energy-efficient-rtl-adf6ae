// stage_cost: Stage 3 of the MPPI iteration (cost calculation) for one lane.
// Reduces each streamed trajectory to one scalar cost
//   J = sum_t [ (x_t - xref_t)' Q (x_t - xref_t) + v_t' R v_t ]
//       + (x_N - xref_N)' Qf (x_N - xref_N)
// where v_t = u_t + w_t is the perturbed control.
//
// How it works: a three-stage pipeline takes one rollout record per clock.
// Stage 1 forms the state errors (heading error wrapped to [-pi, pi)); stage
// 2 evaluates the quadratic forms, inlined, with diagonal Q, R and Qf (a
// choice of this design); stage 3 adds the step cost to a per-trajectory
// accumulator selected by the trajectory's interleave slot (j mod G), which
// removes the loop-carried dependency of a single running sum. At t = N-1 the
// terminal cost is added and the total J is pushed to the cost FIFO.
//
// Interface: record FIFO side (in_empty, in_rec, in_pop); cost FIFO side
// (j_count, j_push, j_data). A record is taken only when the cost FIFO has
// room for everything in the pipeline, so no cost is ever dropped.
module stage_cost
  import mppi_pkg::*;
#(
  parameter int N = 64,
  parameter int G = 64,
  parameter int JDEPTH = 64,
  localparam int GW = $clog2(G),
  localparam int CW = $clog2(JDEPTH) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  state_t        xref [N+1],
  input  logic          in_empty,
  input  rec_t          in_rec,
  output logic          in_pop,
  input  logic [CW-1:0] j_count,
  output logic          j_push,
  output jcost_t        j_data
);
  // w * e^2 with Q16.16 weight and error, result Q48.16
  function automatic cost_t wsq(fx_t w, fx_t e);
    logic signed [63:0]  sq;
    logic signed [127:0] p;
    sq = (64'(e) * 64'(e)) >>> FX_FRAC;
    p  = 128'(w) * 128'(sq);
    return cost_t'(p >>> FX_FRAC);
  endfunction

  assign in_pop = !in_empty && (32'(j_count) + 4 <= JDEPTH);

  // stage 1: errors
  logic        s1_v, s1_first, s1_last;
  logic [15:0] s1_j;
  state_t      s1_e, s1_en;
  ctrl_t       s1_u;
  always_ff @(posedge clk) begin
    state_t xr, xf;
    xr = xref[in_rec.t[$clog2(N+1)-1:0]];
    xf = xref[N];
    s1_e.x   <= in_rec.xt.x - xr.x;
    s1_e.y   <= in_rec.xt.y - xr.y;
    s1_e.th  <= fx_wrap_pi(in_rec.xt.th - xr.th);
    s1_e.v   <= in_rec.xt.v - xr.v;
    s1_en.x  <= in_rec.xn.x - xf.x;
    s1_en.y  <= in_rec.xn.y - xf.y;
    s1_en.th <= fx_wrap_pi(in_rec.xn.th - xf.th);
    s1_en.v  <= in_rec.xn.v - xf.v;
    s1_u     <= in_rec.v;
    s1_j     <= in_rec.j;
    s1_first <= (in_rec.t == 16'd0);
    s1_last  <= (in_rec.t == 16'(N - 1));
    s1_v     <= rst_n ? in_pop : 1'b0;
  end

  // stage 2: quadratic forms
  logic        s2_v, s2_first, s2_last;
  logic [15:0] s2_j;
  cost_t       s2_c, s2_phi;
  always_ff @(posedge clk) begin
    s2_c <= wsq(cfg.q.x, s1_e.x) + wsq(cfg.q.y, s1_e.y)
          + wsq(cfg.q.th, s1_e.th) + wsq(cfg.q.v, s1_e.v)
          + wsq(cfg.r.steer, s1_u.steer) + wsq(cfg.r.accel, s1_u.accel);
    s2_phi <= s1_last ? (wsq(cfg.qf.x, s1_en.x) + wsq(cfg.qf.y, s1_en.y)
                       + wsq(cfg.qf.th, s1_en.th) + wsq(cfg.qf.v, s1_en.v)) : '0;
    s2_j     <= s1_j;
    s2_first <= s1_first;
    s2_last  <= s1_last;
    s2_v     <= rst_n ? s1_v : 1'b0;
  end

  // stage 3: per-trajectory accumulators
  cost_t acc [G];
  cost_t acc_new;
  assign acc_new = (s2_first ? cost_t'(0) : acc[s2_j[GW-1:0]]) + s2_c;

  always_ff @(posedge clk) begin
    if (s2_v) acc[s2_j[GW-1:0]] <= acc_new;
    j_push      <= rst_n ? (s2_v && s2_last) : 1'b0;
    j_data.j    <= s2_j;
    j_data.cost <= acc_new + s2_phi;
  end
endmodule
