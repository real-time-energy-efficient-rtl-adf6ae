// pipe_div: fully pipelined signed Q16.16 divider (restoring long division,
// one quotient bit per stage). It supplies tan(steer) = sin/cos in the vehicle
// dynamics and the normalisation by the weight sum in the control update.
//
// How it works: stage 0 takes magnitudes, forms the dividend |num|*2^16 and
// flags overflow when the quotient needs more than QBITS bits (this includes
// den = 0). Each of the QBITS following stages shifts in one dividend bit and
// subtracts |den| when it fits. The last stage applies the sign; an overflow
// saturates to +-(2^31-1).
//
// Interface: in_valid/num/den/tag_in in, out_valid/quo/tag_out out LATENCY =
// QBITS + 2 cycles later, one result per clock, no stall. |quotient| must stay
// below 2^(QBITS-16) to be exact.
module pipe_div
  import mppi_pkg::*;
#(
  parameter int QBITS = 24,
  parameter int TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t              num,
  input  fx_t              den,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output fx_t              quo,
  output logic [TAG_W-1:0] tag_out
);
  localparam int S = QBITS;

  logic [47:0]      dd  [S+1];   // dividend, consumed from bit QBITS-1 down
  logic [32:0]      rem [S+1];
  logic [31:0]      dv  [S+1];
  logic [31:0]      q   [S+1];
  logic             neg [S+1];
  logic             ovf [S+1];
  logic             vs  [S+1];
  logic [TAG_W-1:0] ts  [S+1];

  always_ff @(posedge clk) begin
    logic [31:0] an, ad;
    logic [47:0] d;
    an = num[31] ? 32'(-num) : 32'(num);
    ad = den[31] ? 32'(-den) : 32'(den);
    d  = {an, 16'h0};
    dd[0]  <= d;
    rem[0] <= 33'(d >> QBITS);
    dv[0]  <= ad;
    q[0]   <= '0;
    neg[0] <= num[31] ^ den[31];
    ovf[0] <= (d >> QBITS) >= 48'(ad);
    ts[0]  <= tag_in;
    vs[0]  <= rst_n ? in_valid : 1'b0;
  end

  for (genvar i = 0; i < S; i++) begin : g_it
    localparam int B = S - 1 - i;
    always_ff @(posedge clk) begin
      logic [32:0] t;
      t = {rem[i][31:0], dd[i][B]};
      if (t >= 33'(dv[i])) begin
        rem[i+1] <= t - 33'(dv[i]);
        q[i+1]   <= q[i] | (32'd1 << B);
      end else begin
        rem[i+1] <= t;
        q[i+1]   <= q[i];
      end
      dd[i+1]  <= dd[i];
      dv[i+1]  <= dv[i];
      neg[i+1] <= neg[i];
      ovf[i+1] <= ovf[i];
      ts[i+1]  <= ts[i];
      vs[i+1]  <= rst_n ? vs[i] : 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (ovf[S]) quo <= neg[S] ? -32'sh7fffffff : 32'sh7fffffff;
    else        quo <= neg[S] ? -fx_t'(q[S]) : fx_t'(q[S]);
    tag_out   <= ts[S];
    out_valid <= rst_n ? vs[S] : 1'b0;
  end
endmodule
