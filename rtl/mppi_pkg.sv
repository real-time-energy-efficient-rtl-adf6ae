// mppi_pkg: types, constants and small arithmetic helpers shared by the MPPI
// (Model Predictive Path Integral) accelerator.
//
// All continuous quantities are signed Q16.16 fixed point (fx_t): 16 integer
// bits, 16 fraction bits. Trajectory costs are 64-bit Q48.16 (cost_t). The
// vehicle is a kinematic bicycle with state (x, y, heading, speed) and control
// (steering angle, acceleration). CORDIC units work internally in Q4.28; their
// arctangent / hyperbolic-arctangent tables are atan(2^-i)*2^28 and
// atanh(2^-i)*2^28, rounded.
//
// Using fixed point throughout is a choice of this design; the number format
// of the original accelerator is not pinned down.
package mppi_pkg;

  typedef logic signed [31:0] fx_t;      // Q16.16
  typedef logic signed [63:0] cost_t;    // Q48.16

  localparam int FX_FRAC = 16;
  localparam fx_t FX_ONE    = 32'sd65536;
  localparam fx_t FX_PI     = 32'sd205887;
  localparam fx_t FX_HALFPI = 32'sd102944;
  localparam fx_t FX_TWOPI  = 32'sd411775;
  localparam fx_t FX_LN2    = 32'sd45426;
  localparam fx_t FX_INVLN2 = 32'sd94548;

  // vehicle state and control
  typedef struct packed {
    fx_t x;
    fx_t y;
    fx_t th;
    fx_t v;
  } state_t;

  typedef struct packed {
    fx_t steer;
    fx_t accel;
  } ctrl_t;

  // one rollout step as streamed from Stage 2 to Stage 3
  typedef struct packed {
    logic [15:0] j;     // trajectory index inside its lane (k = lane + P*j)
    logic [15:0] t;     // time step
    state_t      xt;    // state x_t
    ctrl_t       v;     // applied control u_t + w_t
    state_t      xn;    // next state x_{t+1}
  } rec_t;

  // a finished trajectory cost, Stage 3 to Stage 4
  typedef struct packed {
    logic [15:0] j;
    cost_t       cost;
  } jcost_t;

  // run-time configuration (all Q16.16)
  typedef struct packed {
    fx_t    dt;            // integration step
    fx_t    inv_wheelbase; // 1 / L
    fx_t    inv_lambda;    // 1 / temperature
    fx_t    sigma_steer;   // noise standard deviations (diagonal Sigma_u)
    fx_t    sigma_accel;
    state_t q;             // diagonal of Q
    state_t qf;            // diagonal of Qf
    ctrl_t  r;             // diagonal of R
  } cfg_t;

  // CORDIC
  localparam int CORDIC_ITERS = 20;
  localparam int CORDIC_FRAC  = 28;
  typedef logic signed [31:0] cq_t;      // Q4.28

  localparam logic [31:0] ATAN_TAB [CORDIC_ITERS] = '{
    32'd210828714, 32'd124459457, 32'd65760959, 32'd33381290, 32'd16755422,
    32'd8385879,   32'd4193963,   32'd2097109,  32'd1048571,  32'd524287,
    32'd262144,    32'd131072,    32'd65536,    32'd32768,    32'd16384,
    32'd8192,      32'd4096,      32'd2048,     32'd1024,     32'd512};
  localparam cq_t CORDIC_KC = 32'sd163008219;   // prod 1/sqrt(1+2^-2i)

  // hyperbolic CORDIC: shift sequence with the mandatory repeats of 4 and 13
  localparam int HYP_SHIFT [CORDIC_ITERS] = '{
    1, 2, 3, 4, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 13, 14, 15, 16, 17, 18};
  localparam logic [31:0] ATANH_TAB [CORDIC_ITERS] = '{
    32'd147453245, 32'd68561855, 32'd33730852, 32'd16799113, 32'd16799113,
    32'd8391340,   32'd4194645,  32'd2097195,  32'd1048581,  32'd524289,
    32'd262144,    32'd131072,   32'd65536,    32'd32768,    32'd32768,
    32'd16384,     32'd8192,     32'd4096,     32'd2048,     32'd1024};
  localparam cq_t CORDIC_INV_KH = 32'sd324135026; // 1 / prod sqrt(1-2^-2i)
  localparam cq_t CQ_LN2        = 32'sd186065279; // ln 2 in Q4.28

  // pipeline latencies (cycles from in_valid to out_valid)
  localparam int SINCOS_LAT = CORDIC_ITERS + 2;
  localparam int DIV_QBITS  = 24;
  localparam int DIV_LAT    = DIV_QBITS + 2;
  localparam int DYN_LAT    = SINCOS_LAT + DIV_LAT + 2;  // bicycle_step

  // Q16.16 multiply, truncating toward minus infinity
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FX_FRAC);
  endfunction

  // saturate a 64-bit Q?.16 value into Q16.16
  function automatic fx_t fx_sat(logic signed [63:0] a);
    if (a > 64'sd2147483647)       return 32'sh7fffffff;
    else if (a < -64'sd2147483648) return 32'sh80000000;
    else                           return fx_t'(a);
  endfunction

  // wrap an angle known to lie in [-3pi, 3pi) into [-pi, pi)
  function automatic fx_t fx_wrap_pi(fx_t a);
    if (a >= FX_PI)       return a - FX_TWOPI;
    else if (a < -FX_PI)  return a + FX_TWOPI;
    else                  return a;
  endfunction

endpackage
