// fx_sqrt: fully pipelined square root of an unsigned Q16.16 value, the
// sqrt(-2 ln U1) of the Box-Muller transform.
//
// How it works: the radicand a*2^16 (48 bits) is processed by the classic
// digit-by-digit shift-and-subtract method, one result bit per pipeline
// stage (24 stages), with no multiplier. The 24-bit integer root is the Q16.16
// square root of a (truncated).
//
// Interface: in_valid/a/tag_in in, out_valid/r/tag_out out LATENCY = 25 cycles
// later, one result per clock, no stall.
module fx_sqrt
  import mppi_pkg::*;
#(
  parameter int TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [31:0]      a,
  input  logic [TAG_W-1:0] tag_in,
  output logic             out_valid,
  output fx_t              r,
  output logic [TAG_W-1:0] tag_out
);
  localparam int S = 24;

  logic [47:0]      op  [S+1];
  logic [47:0]      res [S+1];
  logic             vs  [S+1];
  logic [TAG_W-1:0] ts  [S+1];

  always_ff @(posedge clk) begin
    op[0]  <= {a, 16'h0};
    res[0] <= '0;
    ts[0]  <= tag_in;
    vs[0]  <= rst_n ? in_valid : 1'b0;
  end

  for (genvar i = 0; i < S; i++) begin : g_it
    localparam logic [47:0] ONE = 48'h1 << (46 - 2*i);
    always_ff @(posedge clk) begin
      if (op[i] >= res[i] + ONE) begin
        op[i+1]  <= op[i] - (res[i] + ONE);
        res[i+1] <= (res[i] >> 1) + ONE;
      end else begin
        op[i+1]  <= op[i];
        res[i+1] <= res[i] >> 1;
      end
      ts[i+1] <= ts[i];
      vs[i+1] <= rst_n ? vs[i] : 1'b0;
    end
  end

  assign r         = fx_t'(res[S][31:0]);
  assign tag_out   = ts[S];
  assign out_valid = vs[S];
endmodule
