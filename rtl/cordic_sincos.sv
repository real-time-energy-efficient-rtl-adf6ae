// cordic_sincos: fully pipelined circular CORDIC that returns sin and cos of
// a Q16.16 angle, one result per clock, using only shifts and adds.
//
// How it works: the input angle (expected in [-pi, pi]) is folded into
// [-pi/2, pi/2] by adding or subtracting pi and remembering to negate the
// results. Stage 0 registers the folded angle in Q4.28 with x = K (the CORDIC
// gain compensation), y = 0; each of the CORDIC_ITERS following stages rotates
// by +-atan(2^-i) with one add/subtract per coordinate. A last stage rounds to
// Q16.16 and applies the sign. The iteration count (20) is this design's choice.
//
// Interface: in_valid/angle/tag_in in; out_valid/sin_o/cos_o/tag_out come out
// LATENCY = CORDIC_ITERS + 2 cycles later. The tag is carried unchanged so
// callers can keep side data aligned. No stall: the pipeline always advances.
module cordic_sincos
  import mppi_pkg::*;
#(
  parameter int TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t              angle,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output fx_t              sin_o,
  output fx_t              cos_o,
  output logic [TAG_W-1:0] tag_out
);
  localparam int S = CORDIC_ITERS;

  cq_t              xs [S+1];
  cq_t              ys [S+1];
  cq_t              zs [S+1];
  logic             vs [S+1];
  logic             ng [S+1];
  logic [TAG_W-1:0] ts [S+1];

  // stage 0: quadrant fold
  always_ff @(posedge clk) begin
    fx_t a;
    logic n;
    a = angle;
    n = 1'b0;
    if (angle > FX_HALFPI)       begin a = angle - FX_PI; n = 1'b1; end
    else if (angle < -FX_HALFPI) begin a = angle + FX_PI; n = 1'b1; end
    xs[0] <= CORDIC_KC;
    ys[0] <= '0;
    zs[0] <= cq_t'(a) <<< (CORDIC_FRAC - FX_FRAC);
    ng[0] <= n;
    ts[0] <= tag_in;
    vs[0] <= rst_n ? in_valid : 1'b0;
  end

  for (genvar i = 0; i < S; i++) begin : g_it
    always_ff @(posedge clk) begin
      if (zs[i] >= 0) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - cq_t'(ATAN_TAB[i]);
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + cq_t'(ATAN_TAB[i]);
      end
      ng[i+1] <= ng[i];
      ts[i+1] <= ts[i];
      vs[i+1] <= rst_n ? vs[i] : 1'b0;
    end
  end

  // output: round Q4.28 -> Q16.16 and undo the fold
  always_ff @(posedge clk) begin
    fx_t c, s;
    c = fx_t'((xs[S] + 32'sd2048) >>> (CORDIC_FRAC - FX_FRAC));
    s = fx_t'((ys[S] + 32'sd2048) >>> (CORDIC_FRAC - FX_FRAC));
    cos_o     <= ng[S] ? -c : c;
    sin_o     <= ng[S] ? -s : s;
    tag_out   <= ts[S];
    out_valid <= rst_n ? vs[S] : 1'b0;
  end
endmodule
