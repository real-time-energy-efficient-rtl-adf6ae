// control_update: Stage 4 of the MPPI iteration (weighting and control
// sequence update), the global reduction of the design:
//   u_t <- u_t + sum_k alpha_k w_t^k,
//   alpha_k = exp(-(J_k - Jmin)/lambda) / sum_j exp(-(J_j - Jmin)/lambda).
// Subtracting the minimum cost Jmin leaves alpha unchanged and keeps the
// exponentials in range.
//
// How it works, in four phases:
//  1. COLLECT: total costs arrive from the P lane FIFOs (round-robin, one per
//     clock) while the rollouts are still running; they are stored and the
//     running minimum is kept.
//  2. WEIGH: one cost per clock goes through fx_exp; the weight of trajectory
//     k is stored in weight bank k mod P (partitioned like the noise) and
//     added to the weight sum S.
//  3. REDUCE: for every time step t, the K/P words of each noise bank that
//     belong to t are read, P per clock, multiplied by their weights and
//     summed by a P-input adder tree into a Q32.32 accumulator (a K-to-N
//     reduction). Each finished sum is divided by S in two pipe_div units and
//     the new control u_t + du_t is written back.
//  4. SMOOTH: each per-step update is passed through a causal temporal
//     smoothing filter before it is applied: the moving average of the last
//     SMOOTH_W updates (fewer at the start of the horizon). It is kept as a
//     running window sum (add the newest numerator, drop the one that leaves
//     the window), so nothing is recomputed over the full window, and the
//     averaging is folded into the divisor: du_t = window_sum / (S * count).
//     The filter's form and window length are this design's choices; the
//     original only calls it causal and incremental. SMOOTH_W = 1 turns it off.
//     S * SMOOTH_W must fit in 32 bits (K * SMOOTH_W < 32768).
//
// Interface: `start`/`rbuf` begin an iteration; cost FIFO side (j_empty,
// j_data, j_pop); noise read port (nz_raddr out, nz_rdata in one cycle later,
// valid while nz_own is high); control write port (u_we, u_wt, u_wdata);
// `done` pulses after the last control is written. REDUCE takes K*N/P clocks.
module control_update
  import mppi_pkg::*;
#(
  parameter int K = 1024,
  parameter int N = 64,
  parameter int P = 4,
  parameter int SMOOTH_W = 4,
  localparam int J  = K / P,
  localparam int D  = J * N,
  localparam int AW = $clog2(2 * D),
  localparam int KW = $clog2(K),
  localparam int JW = $clog2(J),
  localparam int TW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  fx_t           inv_lambda,
  input  logic          start,
  input  logic          rbuf,
  input  logic [P-1:0]  j_empty,
  input  jcost_t        j_data [P],
  output logic [P-1:0]  j_pop,
  output logic          nz_own,
  output logic [AW-1:0] nz_raddr,
  input  ctrl_t         nz_rdata [P],
  input  ctrl_t         u_nom [N],
  output logic          u_we,
  output logic [TW-1:0] u_wt,
  output ctrl_t         u_wdata,
  output logic          busy,
  output logic          done,
  output cost_t         jmin_o,
  output fx_t           wsum_o
);
  typedef enum logic [2:0] {S_IDLE, S_COLLECT, S_WEIGH, S_WAITW, S_REDUCE, S_WAITU} st_e;
  st_e st;

  cost_t       cost_mem [K];
  fx_t         wmem [P][J];
  cost_t       jmin;
  logic [KW:0] n_in, n_w;
  logic [31:0] wsum;
  logic [$clog2(P)-1:0] rr;
  logic        rbuf_q;

  assign jmin_o = jmin;
  assign wsum_o = fx_t'(wsum);

  // ---------------- COLLECT: round-robin pop of one cost per clock
  logic                 sel_v;
  logic [$clog2(P)-1:0] sel;
  always_comb begin
    sel_v = 1'b0;
    sel   = rr;
    j_pop = '0;
    if (st == S_COLLECT) begin
      for (int o = 0; o < P; o++) begin
        if (!sel_v && !j_empty[(32'(rr) + o) % P]) begin
          sel_v = 1'b1;
          sel   = $clog2(P)'((32'(rr) + o) % P);
        end
      end
      if (sel_v) j_pop[sel] = 1'b1;
    end
  end

  // ---------------- WEIGH: cost -> exp weight
  logic [KW:0]   wk;          // cost index being issued
  logic          e_iv, e_ov;
  cost_t         e_cost;
  logic [KW-1:0] e_k, e_ko;
  fx_t           e_z, e_w;

  always_comb begin
    logic signed [127:0] pz;
    cost_t d;
    d  = e_cost - jmin;
    pz = (128'(d) * 128'(inv_lambda)) >>> FX_FRAC;
    if (pz > 128'sd1048576) e_z = -32'sd1048576;     // below -16: weight 0
    else                    e_z = -fx_t'(pz);
  end

  fx_exp #(.TAG_W(KW)) u_exp (
    .clk, .rst_n, .in_valid(e_iv), .z(e_z), .tag_in(e_k),
    .out_valid(e_ov), .e(e_w), .tag_out(e_ko));

  // ---------------- REDUCE: weighted noise sums
  logic [TW:0]     rt;        // time step being issued
  logic [JW:0]     rj;
  logic            r1_v, r1_first, r1_last;
  logic [JW-1:0]   r1_j;
  logic [TW-1:0]   r1_t;
  logic signed [63:0] pr_s [P];
  logic signed [63:0] pr_a [P];
  logic            r2_v, r2_first, r2_last;
  logic [TW-1:0]   r2_t;
  logic signed [63:0] tree_s, tree_a;
  logic signed [63:0] acc_s, acc_a;
  logic            r3_v;
  logic [TW-1:0]   r3_t;
  logic            dv_s, dv_a;
  // smoothing window
  fx_t                hist_s [SMOOTH_W];
  fx_t                hist_a [SMOOTH_W];
  logic signed [63:0] win_s, win_a;
  logic               r4_v;
  logic [TW-1:0]      r4_t;
  logic [31:0]        r4_den;
  fx_t             du_s, du_a;
  logic [TW-1:0]   dt_s, dt_a_unused;
  logic [TW:0]     n_u;

  // noise read address (registered inside the memory, data meets r1)
  assign nz_raddr = AW'((rbuf_q ? D : 0) + 32'(rj) * N + 32'(rt[TW-1:0]));

  // P-input adder tree (log2(P) levels)
  always_comb begin
    logic signed [63:0] ls [2*P];
    logic signed [63:0] la [2*P];
    for (int p = 0; p < P; p++) begin
      ls[P + p] = pr_s[p];
      la[P + p] = pr_a[p];
    end
    for (int n = P - 1; n >= 1; n--) begin
      ls[n] = ls[2*n] + ls[2*n + 1];
      la[n] = la[2*n] + la[2*n + 1];
    end
    ls[0]  = '0;
    la[0]  = '0;
    tree_s = ls[1];
    tree_a = la[1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      busy   <= 1'b0;
      done   <= 1'b0;
      rr     <= '0;
      n_in   <= '0;
      n_w    <= '0;
      wk     <= '0;
      e_iv   <= 1'b0;
      nz_own <= 1'b0;
      r1_v   <= 1'b0;
      r2_v   <= 1'b0;
      r3_v   <= 1'b0;
      r4_v   <= 1'b0;
      n_u    <= '0;
      rt     <= '0;
      rj     <= '0;
      wsum   <= '0;
      jmin   <= '0;
      rbuf_q <= 1'b0;
    end else begin
      done <= 1'b0;
      e_iv <= 1'b0;
      r1_v <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          busy   <= 1'b1;
          rbuf_q <= rbuf;
          n_in   <= '0;
          jmin   <= 64'sh7fffffffffffffff;
          st     <= S_COLLECT;
        end
        S_COLLECT: begin
          if (sel_v) begin
            cost_mem[KW'(32'(sel) + P * 32'(j_data[sel].j))] <= j_data[sel].cost;
            if (j_data[sel].cost < jmin) jmin <= j_data[sel].cost;
            rr   <= $clog2(P)'((32'(sel) + 1) % P);
            n_in <= n_in + 1'b1;
          end
          if (n_in == (KW+1)'(K)) begin
            wk   <= '0;
            n_w  <= '0;
            wsum <= '0;
            st   <= S_WEIGH;
          end
        end
        S_WEIGH: begin
          e_cost <= cost_mem[wk[KW-1:0]];
          e_k    <= wk[KW-1:0];
          e_iv   <= 1'b1;
          wk     <= wk + 1'b1;
          if (wk == (KW+1)'(K - 1)) st <= S_WAITW;
        end
        S_WAITW: if (n_w == (KW+1)'(K)) begin
          rt     <= '0;
          rj     <= '0;
          n_u    <= '0;
          nz_own <= 1'b1;
          st     <= S_REDUCE;
        end
        S_REDUCE: begin
          // issue noise read (t = rt, j = rj) for all banks
          r1_v     <= 1'b1;
          r1_j     <= rj[JW-1:0];
          r1_t     <= rt[TW-1:0];
          r1_first <= (rj == '0);
          r1_last  <= (rj == (JW+1)'(J - 1));
          if (rj == (JW+1)'(J - 1)) begin
            rj <= '0;
            rt <= rt + 1'b1;
            if (rt == (TW+1)'(N - 1)) st <= S_WAITU;
          end else rj <= rj + 1'b1;
        end
        S_WAITU: if (n_u == (TW+1)'(N)) begin
          nz_own <= 1'b0;
          busy   <= 1'b0;
          done   <= 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase

      if (e_ov) begin
        wmem[32'(e_ko) % P][32'(e_ko) / P] <= e_w;
        wsum <= wsum + 32'(e_w);
        n_w  <= n_w + 1'b1;
      end

      // r1 -> r2: noise data arrived, weight products
      r2_v     <= r1_v;
      r2_first <= r1_first;
      r2_last  <= r1_last;
      r2_t     <= r1_t;
      for (int p = 0; p < P; p++) begin
        pr_s[p] <= 64'(wmem[p][r1_j]) * 64'(nz_rdata[p].steer);
        pr_a[p] <= 64'(wmem[p][r1_j]) * 64'(nz_rdata[p].accel);
      end
      // r2 -> accumulate
      if (r2_v) begin
        acc_s <= r2_first ? tree_s : acc_s + tree_s;
        acc_a <= r2_first ? tree_a : acc_a + tree_a;
      end
      r3_v <= r2_v && r2_last;
      r3_t <= r2_t;
      // r3 -> r4: temporal smoothing window
      r4_v <= r3_v;
      if (r3_v) begin
        fx_t ns, na;
        ns = fx_sat(acc_s >>> FX_FRAC);
        na = fx_sat(acc_a >>> FX_FRAC);
        win_s <= ((r3_t == '0) ? 64'sd0 : win_s) + 64'(ns)
                 - ((32'(r3_t) >= SMOOTH_W) ? 64'(hist_s[SMOOTH_W-1]) : 64'sd0);
        win_a <= ((r3_t == '0) ? 64'sd0 : win_a) + 64'(na)
                 - ((32'(r3_t) >= SMOOTH_W) ? 64'(hist_a[SMOOTH_W-1]) : 64'sd0);
        hist_s[0] <= ns;
        hist_a[0] <= na;
        for (int i = 1; i < SMOOTH_W; i++) begin
          hist_s[i] <= hist_s[i-1];
          hist_a[i] <= hist_a[i-1];
        end
        r4_t   <= r3_t;
        r4_den <= wsum * ((32'(r3_t) + 1 < SMOOTH_W) ? 32'(r3_t) + 32'd1 : 32'(SMOOTH_W));
      end
      if (dv_s) n_u <= n_u + 1'b1;
    end
  end

  // normalise and average: du = window_sum / (S * count)
  pipe_div #(.QBITS(DIV_QBITS), .TAG_W(TW)) u_div_s (
    .clk, .rst_n, .in_valid(r4_v), .num(fx_sat(win_s)), .den(fx_t'(r4_den)),
    .tag_in(r4_t), .out_valid(dv_s), .quo(du_s), .tag_out(dt_s));
  pipe_div #(.QBITS(DIV_QBITS), .TAG_W(TW)) u_div_a (
    .clk, .rst_n, .in_valid(r4_v), .num(fx_sat(win_a)), .den(fx_t'(r4_den)),
    .tag_in(r4_t), .out_valid(dv_a), .quo(du_a), .tag_out(dt_a_unused));

  assign u_we          = dv_s;
  assign u_wt          = dt_s;
  assign u_wdata.steer = u_nom[dt_s].steer + du_s;
  assign u_wdata.accel = u_nom[dt_s].accel + du_a;

  initial if (SMOOTH_W < 1 || longint'(K) * SMOOTH_W >= 32768)
    $error("control_update: SMOOTH_W must be at least 1 and K*SMOOTH_W below 32768");

  always_ff @(posedge clk) begin
    if (rst_n) assert (dv_s == dv_a) else $error("control_update: divider pipelines misaligned");
  end
endmodule
