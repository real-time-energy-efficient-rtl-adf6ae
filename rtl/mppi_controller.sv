// mppi_controller: the "initialize" block of the MPPI accelerator. It holds
// the measured state x0 and the nominal control sequence u_nom[0..N-1],
// sequences the four stages through MAX_ITERS MPPI iterations per control
// step, then sends u_nom[0] to the actuators and shifts the sequence.
//
// How it works: two noise buffers are tracked with `full` flags. The noise
// generator is restarted on the next empty buffer whenever it is idle, so it
// runs ahead of, and overlaps with, the other stages. One iteration is:
// wait for a full noise buffer -> desired states (Stage IV) -> rollouts and
// costs (Stages 2/3) started together with the control update (Stage 4),
// which collects costs as they appear -> control writes -> release the
// buffer. After the last iteration u_nom[0] is presented on u_act for one
// cycle (u_act_valid) and the sequence is shifted left by one step, repeating
// the last control (warm start for the next control step). The shift and the
// zero initial sequence are this design's choices.
//
// Interface: `start` with x0_in begins a control step (ignored while busy);
// start/done pulse pairs to each stage; control writes from Stage 4.
module mppi_controller
  import mppi_pkg::*;
#(
  parameter int N = 64,
  parameter int MAX_ITERS = 1,
  localparam int TW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  state_t        x0_in,
  output logic          busy,
  output state_t        x0,
  output ctrl_t         u_nom [N],
  output logic          u_act_valid,
  output ctrl_t         u_act,
  output logic [15:0]   iter,
  // Stage 1
  output logic          ng_start,
  output logic          ng_wbuf,
  input  logic          ng_done,
  // Stage IV
  output logic          ds_start,
  input  logic          ds_done,
  // Stages 2/3 and 4
  output logic          ro_start,
  output logic          cu_start,
  output logic          rbuf,
  input  logic          cu_done,
  input  logic          u_we,
  input  logic [TW-1:0] u_wt,
  input  ctrl_t         u_wdata
);
  typedef enum logic [2:0] {S_IDLE, S_WAITNZ, S_DS, S_RUN, S_ACT} st_e;
  st_e st;

  logic [1:0] full;
  logic       ng_run;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      busy        <= 1'b0;
      full        <= '0;
      ng_run      <= 1'b0;
      ng_start    <= 1'b0;
      ng_wbuf     <= 1'b0;
      ds_start    <= 1'b0;
      ro_start    <= 1'b0;
      cu_start    <= 1'b0;
      rbuf        <= 1'b0;
      iter        <= '0;
      u_act_valid <= 1'b0;
      u_act       <= '0;
      x0          <= '0;
      for (int t = 0; t < N; t++) u_nom[t] <= '0;
    end else begin
      ng_start    <= 1'b0;
      ds_start    <= 1'b0;
      ro_start    <= 1'b0;
      cu_start    <= 1'b0;
      u_act_valid <= 1'b0;

      // Stage 1 runs ahead into whichever buffer is free
      if (!ng_run && !full[ng_wbuf] && !ng_start) begin
        ng_start <= 1'b1;
        ng_run   <= 1'b1;
      end
      if (ng_done) begin
        full[ng_wbuf] <= 1'b1;
        ng_wbuf       <= ~ng_wbuf;
        ng_run        <= 1'b0;
      end

      if (u_we) u_nom[u_wt] <= u_wdata;

      unique case (st)
        S_IDLE: if (start) begin
          x0   <= x0_in;
          iter <= '0;
          busy <= 1'b1;
          st   <= S_WAITNZ;
        end
        S_WAITNZ: if (full[rbuf]) begin
          ds_start <= 1'b1;
          st       <= S_DS;
        end
        S_DS: if (ds_done) begin
          ro_start <= 1'b1;
          cu_start <= 1'b1;
          st       <= S_RUN;
        end
        S_RUN: if (cu_done) begin
          full[rbuf] <= 1'b0;
          rbuf       <= ~rbuf;
          iter       <= iter + 1'b1;
          st         <= (32'(iter) + 1 >= MAX_ITERS) ? S_ACT : S_WAITNZ;
        end
        S_ACT: begin
          u_act       <= u_nom[0];
          u_act_valid <= 1'b1;
          for (int t = 0; t < N - 1; t++) u_nom[t] <= u_nom[t+1];
          busy <= 1'b0;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
