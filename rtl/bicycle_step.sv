// bicycle_step: one explicit-Euler step of the kinematic bicycle model,
//   x'  = x  + v*cos(th)*dt
//   y'  = y  + v*sin(th)*dt
//   th' = th + v*tan(steer)/L*dt   (wrapped to [-pi, pi))
//   v'  = v  + accel*dt
// fully pipelined: one (state, control) pair in and one next state out per
// clock.
//
// How it works: two cordic_sincos units evaluate sin/cos of the heading and of
// the steering angle side by side; pipe_div forms tan(steer) = sin/cos; two
// final stages scale by v*dt and 1/L and update the four state components in
// parallel. The steering angle is clamped to +-1.5 rad before the tangent (a
// choice of this design to keep tan finite). The model equations are the
// standard kinematic bicycle; the original only names the model.
//
// Interface: in_valid/s_in/u_in/tag_in in; out_valid/s_out/tag_out come
// DYN_LAT (mppi_pkg) cycles later. dt and inv_wheelbase are quasi-static
// configuration inputs. No stall.
module bicycle_step
  import mppi_pkg::*;
#(
  parameter int TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  fx_t              dt,
  input  fx_t              inv_wheelbase,
  input  logic             in_valid,
  input  state_t           s_in,
  input  ctrl_t            u_in,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output state_t           s_out,
  output logic [TAG_W-1:0] tag_out
);
  localparam fx_t STEER_MAX = 32'sd98304;   // 1.5 rad
  localparam int  T1 = TAG_W + $bits(state_t) + $bits(ctrl_t);
  localparam int  T2 = T1 + 64;

  fx_t steer_c;
  assign steer_c = (u_in.steer > STEER_MAX)  ? STEER_MAX :
                   (u_in.steer < -STEER_MAX) ? -STEER_MAX : u_in.steer;

  logic          h_v, d_v, q_v;
  fx_t           h_s, h_c, d_s, d_c, tan_d;
  logic [T1-1:0] h_t;
  logic [TAG_W-1:0] d_t_unused;
  logic [T2-1:0] q_t;

  cordic_sincos #(.TAG_W(T1)) u_head (
    .clk, .rst_n, .in_valid, .angle(s_in.th), .tag_in({tag_in, s_in, u_in}),
    .out_valid(h_v), .sin_o(h_s), .cos_o(h_c), .tag_out(h_t));

  cordic_sincos #(.TAG_W(TAG_W)) u_steer (
    .clk, .rst_n, .in_valid, .angle(steer_c), .tag_in(tag_in),
    .out_valid(d_v), .sin_o(d_s), .cos_o(d_c), .tag_out(d_t_unused));

  pipe_div #(.QBITS(DIV_QBITS), .TAG_W(T2)) u_tan (
    .clk, .rst_n, .in_valid(h_v), .num(d_s), .den(d_c),
    .tag_in({h_t, h_s, h_c}),
    .out_valid(q_v), .quo(tan_d), .tag_out(q_t));

  // unpack the tag: {tag, state, ctrl, sin(th), cos(th)}
  logic [TAG_W-1:0] q_tag;
  state_t           q_s;
  ctrl_t            q_u;
  fx_t              q_sin, q_cos;
  assign {q_tag, q_s, q_u, q_sin, q_cos} = q_t;

  // stage A: v*dt, a*dt, tan/L
  logic             a_v;
  logic [TAG_W-1:0] a_tag;
  state_t           a_s;
  fx_t              a_vdt, a_adt, a_kappa, a_sin, a_cos;
  always_ff @(posedge clk) begin
    a_vdt   <= fx_mul(q_s.v, dt);
    a_adt   <= fx_mul(q_u.accel, dt);
    a_kappa <= fx_mul(tan_d, inv_wheelbase);
    a_sin   <= q_sin;
    a_cos   <= q_cos;
    a_s     <= q_s;
    a_tag   <= q_tag;
    a_v     <= rst_n ? q_v : 1'b0;
  end

  // stage B: state update
  always_ff @(posedge clk) begin
    s_out.x   <= a_s.x + fx_mul(a_vdt, a_cos);
    s_out.y   <= a_s.y + fx_mul(a_vdt, a_sin);
    s_out.th  <= fx_wrap_pi(a_s.th + fx_mul(a_vdt, a_kappa));
    s_out.v   <= a_s.v + a_adt;
    tag_out   <= a_tag;
    out_valid <= rst_n ? a_v : 1'b0;
  end

  // the two CORDIC units are identical pipelines and stay aligned
  always_ff @(posedge clk) begin
    if (rst_n) assert (h_v == d_v) else $error("bicycle_step: sin/cos pipelines misaligned");
  end
endmodule
