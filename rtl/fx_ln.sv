// fx_ln: fully pipelined natural logarithm of a uniform random word, the
// ln(U1) of the Box-Muller transform.
//
// How it works: the input u is read as the fraction u/2^32 (u must not be
// zero). A leading-zero count normalises it to m in [0.5, 1) times 2^-lz.
// A hyperbolic CORDIC in vectoring mode, started at x = m+1, y = m-1, drives y
// to zero and leaves z = atanh((m-1)/(m+1)) = ln(m)/2. The result is
// ln(u) = 2z - lz*ln2 in Q16.16 (always <= 0).
//
// Interface: in_valid/u/tag_in in, out_valid/ln_o/tag_out out LATENCY =
// CORDIC_ITERS + 2 cycles later, one result per clock, no stall.
module fx_ln
  import mppi_pkg::*;
#(
  parameter int TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [31:0]      u,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output fx_t              ln_o,
  output logic [TAG_W-1:0] tag_out
);
  localparam int S = CORDIC_ITERS;

  cq_t              xs [S+1];
  cq_t              ys [S+1];
  cq_t              zs [S+1];
  logic             vs [S+1];
  logic [4:0]       lzs[S+1];
  logic [TAG_W-1:0] ts [S+1];

  // stage 0: normalise
  always_ff @(posedge clk) begin
    logic [4:0]  lz;
    logic [31:0] m;
    lz = 5'd0;
    for (int b = 31; b >= 0; b--) begin
      if (u[b]) begin
        lz = 5'(31 - b);
        break;
      end
    end
    m = u << lz;                          // m/2^32 in [0.5, 1)
    xs[0]  <= cq_t'({4'b0001, m[31:4]});  // 1 + m in Q4.28
    ys[0]  <= cq_t'({4'b0000, m[31:4]}) - (32'sd1 <<< CORDIC_FRAC);
    zs[0]  <= '0;
    lzs[0] <= lz;
    ts[0]  <= tag_in;
    vs[0]  <= rst_n ? in_valid : 1'b0;
  end

  for (genvar i = 0; i < S; i++) begin : g_it
    always_ff @(posedge clk) begin
      if (ys[i] < 0) begin
        xs[i+1] <= xs[i] + (ys[i] >>> HYP_SHIFT[i]);
        ys[i+1] <= ys[i] + (xs[i] >>> HYP_SHIFT[i]);
        zs[i+1] <= zs[i] - cq_t'(ATANH_TAB[i]);
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> HYP_SHIFT[i]);
        ys[i+1] <= ys[i] - (xs[i] >>> HYP_SHIFT[i]);
        zs[i+1] <= zs[i] + cq_t'(ATANH_TAB[i]);
      end
      lzs[i+1] <= lzs[i];
      ts[i+1]  <= ts[i];
      vs[i+1]  <= rst_n ? vs[i] : 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    fx_t lnm;
    lnm = fx_t'(((zs[S] <<< 1) + 32'sd2048) >>> (CORDIC_FRAC - FX_FRAC));
    ln_o      <= lnm - fx_t'(32'(lzs[S]) * 32'(FX_LN2));
    tag_out   <= ts[S];
    out_valid <= rst_n ? vs[S] : 1'b0;
  end
endmodule
