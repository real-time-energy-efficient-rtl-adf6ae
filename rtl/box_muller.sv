// box_muller: turns two uniform 32-bit words into two independent standard
// normal samples, R*sin(Theta) for steering noise and R*cos(Theta) for
// acceleration noise, with R = sqrt(-2 ln U1).
//
// How it works: the three shift-and-add units run one after another, each
// carrying the data the next needs in its tag: fx_ln computes ln(U1) (U1 read
// as u1/2^32), fx_sqrt the radius, cordic_sincos the sine and cosine of
// Theta = pi*u2, where u2 is read as a signed fraction in [-1, 1). That makes
// Theta uniform on [-pi, pi), which gives the same distribution as the
// textbook 2*pi*U2 and needs no extra fold. A last stage forms the products.
//
// Interface: in_valid/u1/u2/tag_in in; out_valid/z_steer/z_accel/tag_out
// (Q16.16) out LATENCY = BM_LAT cycles later, one pair per clock, no stall.
module box_muller
  import mppi_pkg::*;
#(
  parameter int TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [31:0]      u1,
  input  logic [31:0]      u2,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output fx_t              z_steer,
  output fx_t              z_accel,
  output logic [TAG_W-1:0] tag_out
);
  localparam int LT = TAG_W + 32;

  logic             ln_v, sq_v, sc_v;
  fx_t              ln_r, sq_r, s_r, c_r;
  logic [LT-1:0]    ln_t, sq_t, sc_t;
  fx_t              m2ln;

  fx_ln #(.TAG_W(LT)) u_ln (
    .clk, .rst_n, .in_valid, .u(u1), .tag_in({u2, tag_in}),
    .out_valid(ln_v), .ln_o(ln_r), .tag_out(ln_t));

  assign m2ln = -(ln_r <<< 1);   // -2 ln(U1) >= 0

  fx_sqrt #(.TAG_W(LT)) u_sqrt (
    .clk, .rst_n, .in_valid(ln_v), .a(m2ln), .tag_in(ln_t),
    .out_valid(sq_v), .r(sq_r), .tag_out(sq_t));

  // Theta = pi * (u2 as a signed fraction)
  fx_t theta;
  always_comb begin
    logic signed [63:0] p;
    p     = 64'(signed'(sq_t[LT-1 -: 32])) * 64'(FX_PI);
    theta = fx_t'(p >>> 31);
  end

  cordic_sincos #(.TAG_W(LT)) u_sc (
    .clk, .rst_n, .in_valid(sq_v), .angle(theta),
    .tag_in({sq_r, sq_t[TAG_W-1:0]}),
    .out_valid(sc_v), .sin_o(s_r), .cos_o(c_r), .tag_out(sc_t));

  always_ff @(posedge clk) begin
    z_steer   <= fx_mul(fx_t'(sc_t[LT-1 -: 32]), s_r);
    z_accel   <= fx_mul(fx_t'(sc_t[LT-1 -: 32]), c_r);
    tag_out   <= sc_t[TAG_W-1:0];
    out_valid <= rst_n ? sc_v : 1'b0;
  end
endmodule
