// fx_exp: fully pipelined exponential e^z for Q16.16 z <= 0, used for the
// importance weights exp(-(J - Jmin)/lambda) of the control update.
//
// How it works: range reduction writes -z = q*ln2 + r with integer q >= 0 and
// r in [0, ln2) (one multiply by 1/ln2, one by ln2). A hyperbolic CORDIC in
// rotation mode then computes cosh(-r) + sinh(-r) = e^-r from x = 1/Kh, y = 0,
// with the shift sequence 1,2,3,4,4,...,13,13,...,18 (repeats needed for
// convergence). The result is shifted right by q. Inputs below -16 give 0;
// positive inputs are treated as 0 (result 1.0).
//
// Interface: in_valid/z/tag_in in, out_valid/e/tag_out out LATENCY =
// CORDIC_ITERS + 3 cycles later, one result per clock, no stall.
module fx_exp
  import mppi_pkg::*;
#(
  parameter int TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t              z,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output fx_t              e,
  output logic [TAG_W-1:0] tag_out
);
  localparam int S = CORDIC_ITERS;

  // stage A: q = floor(-z/ln2)
  fx_t              a_nz;
  logic [5:0]       a_q;
  logic             a_v, a_zero;
  logic [TAG_W-1:0] a_t;
  always_ff @(posedge clk) begin
    fx_t nz;
    logic signed [63:0] p;
    nz = (z > 0) ? '0 : -z;
    p  = 64'(nz) * 64'(FX_INVLN2);
    a_nz   <= nz;
    a_zero <= (nz > 32'sd1048576);        // -z > 16: e^z < 2^-23
    a_q    <= 6'(p >>> 32);
    a_t    <= tag_in;
    a_v    <= rst_n ? in_valid : 1'b0;
  end

  cq_t              xs [S+1];
  cq_t              ys [S+1];
  cq_t              zs [S+1];
  logic             vs [S+1];
  logic             zr [S+1];
  logic [5:0]       qs [S+1];
  logic [TAG_W-1:0] ts [S+1];

  // stage B: r = -z - q*ln2, start the CORDIC with angle -r
  always_ff @(posedge clk) begin
    fx_t r;
    logic adj;
    r   = a_nz - fx_t'(32'(a_q) * 32'(FX_LN2));
    adj = (r >= FX_LN2);                  // guard the truncated 1/ln2
    if (adj) r = r - FX_LN2;
    xs[0] <= CORDIC_INV_KH;
    ys[0] <= '0;
    zs[0] <= -(cq_t'(r) <<< (CORDIC_FRAC - FX_FRAC));
    qs[0] <= adj ? a_q + 6'd1 : a_q;
    zr[0] <= a_zero;
    ts[0] <= a_t;
    vs[0] <= rst_n ? a_v : 1'b0;
  end

  for (genvar i = 0; i < S; i++) begin : g_it
    always_ff @(posedge clk) begin
      if (zs[i] >= 0) begin
        xs[i+1] <= xs[i] + (ys[i] >>> HYP_SHIFT[i]);
        ys[i+1] <= ys[i] + (xs[i] >>> HYP_SHIFT[i]);
        zs[i+1] <= zs[i] - cq_t'(ATANH_TAB[i]);
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> HYP_SHIFT[i]);
        ys[i+1] <= ys[i] - (xs[i] >>> HYP_SHIFT[i]);
        zs[i+1] <= zs[i] + cq_t'(ATANH_TAB[i]);
      end
      qs[i+1] <= qs[i];
      zr[i+1] <= zr[i];
      ts[i+1] <= ts[i];
      vs[i+1] <= rst_n ? vs[i] : 1'b0;
    end
  end

  // output: e^-r = x + y in Q4.28, to Q16.16, then scale by 2^-q
  always_ff @(posedge clk) begin
    cq_t s;
    s = xs[S] + ys[S];
    if (zr[S] || qs[S] > 6'd30) e <= '0;
    else e <= fx_t'(((s >>> qs[S]) + 32'sd2048) >>> (CORDIC_FRAC - FX_FRAC));
    tag_out   <= ts[S];
    out_valid <= rst_n ? vs[S] : 1'b0;
  end
endmodule
