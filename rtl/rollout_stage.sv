// rollout_stage: Stage 2 of the MPPI iteration (trajectory rollouts). P lanes
// in lock step roll out all K perturbed trajectories over the N-step horizon:
// for each step the lane adds the noise sample to the nominal control
// ("update controls"), advances the kinematic bicycle ("update states") and
// streams the step out ("simulated states") to the cost stage.
//
// How it works: the trajectory loop is unrolled P times (lane p owns
// trajectories k = p + P*j and reads noise bank p); the time loop is
// pipelined. Because x_{t+1} depends on x_t and the dynamics pipeline is
// DYN_LAT deep, each lane interleaves a group of G trajectories: it issues
// step t of trajectories j = g*G .. g*G+G-1 on consecutive clocks, then step
// t+1 of the same group, so the result of a step is back in the per-lane
// state registers before that trajectory's next step is issued (G > DYN_LAT).
// This interleaving is this design's way of pipelining the time loop.
//
// Flow control: an issue happens only when every lane's output FIFO has room
// for all steps in flight plus one (credit scheme), so the fixed-latency
// pipeline never has to stop.
//
// Interface: `start` with `rbuf` (noise buffer to read) and x0; noise read
// address out (combinational, the memory registers it), bank data in
// the next cycle; per-lane record stream out
// (out_valid, out_rec); `done` pulses after the last record. One step per lane
// per clock when not stalled: K*N/P cycles plus latency per iteration.
module rollout_stage
  import mppi_pkg::*;
#(
  parameter int K = 1024,
  parameter int N = 64,
  parameter int P = 4,
  parameter int G = 64,
  parameter int FIFO_DEPTH = 64,
  localparam int J  = K / P,
  localparam int D  = J * N,
  localparam int AW = $clog2(2 * D),
  localparam int GW = $clog2(G),
  localparam int CW = $clog2(FIFO_DEPTH) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          start,
  input  logic          rbuf,
  input  state_t        x0,
  input  ctrl_t         u_nom [N],
  output logic [AW-1:0] nz_raddr,
  input  ctrl_t         nz_rdata [P],
  input  logic [CW-1:0] fifo_count [P],
  output logic          busy,
  output logic          done,
  output logic          stall,
  output logic          out_valid,
  output rec_t          out_rec [P]
);
  if (G <= DYN_LAT) begin : g_chk
    $error("rollout_stage: G must exceed the dynamics latency");
  end
  if ((J % G) != 0 || (1 << GW) != G) begin : g_chk2
    $error("rollout_stage: G must be a power of two dividing K/P");
  end

  logic          issuing;
  logic [15:0]   jg;          // first trajectory of the current group
  logic [GW-1:0] i;
  logic [15:0]   t;
  logic [15:0]   inflight;
  logic          can_issue, do_issue;
  logic          p1_v;
  logic [15:0]   p1_j, p1_t;
  logic          out_v_int;

  always_comb begin
    can_issue = 1'b1;
    for (int p = 0; p < P; p++)
      if (32'(fifo_count[p]) + 32'(inflight) + 1 > FIFO_DEPTH) can_issue = 1'b0;
  end
  assign do_issue = issuing && can_issue;
  // the noise memory registers this address, so its data meets p1 below
  assign nz_raddr = AW'((rbuf ? D : 0) + (32'(jg) + 32'(i)) * N + 32'(t));
  assign stall    = issuing && !can_issue;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      issuing  <= 1'b0;
      busy     <= 1'b0;
      done     <= 1'b0;
      jg       <= '0;
      i        <= '0;
      t        <= '0;
      inflight <= '0;
      p1_v     <= 1'b0;
    end else begin
      done <= 1'b0;
      p1_v <= do_issue;
      inflight <= inflight + 16'(do_issue) - 16'(out_v_int);
      if (start && !busy) begin
        issuing <= 1'b1;
        busy    <= 1'b1;
        jg      <= '0;
        i       <= '0;
        t       <= '0;
      end else if (do_issue) begin
        p1_j     <= jg + 16'(i);
        p1_t     <= t;
        i        <= i + 1'b1;
        if (i == GW'(G - 1)) begin
          if (t == 16'(N - 1)) begin
            t <= '0;
            if (32'(jg) + G >= J) issuing <= 1'b0;
            else                  jg <= jg + 16'(G);
          end else t <= t + 1'b1;
        end
      end
      if (busy && !issuing && !start && inflight == 16'd0 && !p1_v) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  logic out_v [P];
  for (genvar p = 0; p < P; p++) begin : g_lane
    state_t st_mem [G];
    state_t cur;
    ctrl_t  v;
    localparam int TW = 32 + $bits(state_t) + $bits(ctrl_t);
    logic [TW-1:0] tg;
    state_t        sn;
    logic          ov;

    assign cur     = (p1_t == 16'd0) ? x0 : st_mem[p1_j[GW-1:0]];
    assign v.steer = u_nom[p1_t[$clog2(N)-1:0]].steer + nz_rdata[p].steer;
    assign v.accel = u_nom[p1_t[$clog2(N)-1:0]].accel + nz_rdata[p].accel;

    bicycle_step #(.TAG_W(TW)) u_dyn (
      .clk, .rst_n, .dt(cfg.dt), .inv_wheelbase(cfg.inv_wheelbase),
      .in_valid(p1_v), .s_in(cur), .u_in(v), .tag_in({p1_j, p1_t, cur, v}),
      .out_valid(ov), .s_out(sn), .tag_out(tg));

    always_ff @(posedge clk) begin
      if (ov) st_mem[tg[TW-16 +: GW]] <= sn;
    end

    assign out_v[p]       = ov;
    assign out_rec[p].j   = tg[TW-1 -: 16];
    assign out_rec[p].t   = tg[TW-17 -: 16];
    assign out_rec[p].xt  = tg[$bits(state_t)+$bits(ctrl_t)-1 -: $bits(state_t)];
    assign out_rec[p].v   = tg[$bits(ctrl_t)-1:0];
    assign out_rec[p].xn  = sn;
  end

  assign out_v_int = out_v[0];
  assign out_valid = out_v[0];
endmodule
