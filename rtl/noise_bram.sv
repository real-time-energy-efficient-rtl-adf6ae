// noise_bram: on-chip memory for the control-perturbation noise, split into P
// independent banks so that P noise pairs can be written and P read in the
// same clock cycle (array partitioning).
//
// How it works: trajectory k lives in bank k mod P; inside a bank, the N
// (steer, accel) pairs of local trajectory j = k div P sit at addresses
// j*N + t. Every bank holds two such buffers (ping-pong, selected by the top
// address bit) so the noise generator can fill one while the rollout and
// update stages read the other. Cyclic partitioning by trajectory and the
// double buffer are this design's choices.
//
// Interface: one write port per bank (wr_en[p], shared wr_addr, wr_data[p])
// and one read port per bank with a shared address; rd_data is registered,
// valid one cycle after rd_addr.
module noise_bram
  import mppi_pkg::*;
#(
  parameter int K = 1024,
  parameter int N = 64,
  parameter int P = 4,
  localparam int DEPTH = 2 * (K / P) * N,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [P-1:0]  wr_en,
  input  logic [AW-1:0] wr_addr,
  input  ctrl_t         wr_data [P],
  input  logic [AW-1:0] rd_addr,
  output ctrl_t         rd_data [P]
);
  for (genvar p = 0; p < P; p++) begin : g_bank
    ctrl_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en[p]) mem[wr_addr] <= wr_data[p];
      rd_data[p] <= mem[rd_addr];
    end
  end
endmodule
