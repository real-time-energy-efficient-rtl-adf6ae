// desired_state: Stage IV of the MPPI iteration ("desired state / waypoint").
// Rolls the current nominal control sequence forward from the measured state
// without noise and, for every horizon step t = 0..N, picks the reference
// waypoint nearest to the nominal state. The chosen waypoints are the
// reference states x_ref(t) of the stage and terminal costs.
//
// How it works: for each t the module scans all M stored waypoints, one per
// clock, keeping the one with the smallest squared (x, y) distance to the
// nominal state ("nearest neighbour"). It then sends the nominal state and
// u_nom[t] through bicycle_step ("update states") and waits for the next
// nominal state. The exhaustive scan and the full-state waypoint format
// (x, y, heading, speed) are this design's choices.
//
// Interface: waypoints are loaded through wp_we/wp_addr/wp_data. `start`
// latches x0 and runs; `done` pulses when xref[0..N] are valid. Time per run:
// (N+1)*(M+2) + N*(DYN_LAT+1) cycles.
module desired_state
  import mppi_pkg::*;
#(
  parameter int N = 64,
  parameter int M = 256,
  localparam int MW = $clog2(M),
  localparam int TW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          wp_we,
  input  logic [MW-1:0] wp_addr,
  input  state_t        wp_data,
  input  logic          start,
  input  state_t        x0,
  input  ctrl_t         u_nom [N],
  output logic          busy,
  output logic          done,
  output state_t        xref [N+1]
);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_STEP, S_WAIT} st_e;
  st_e st;

  state_t        wp_mem [M];
  state_t        rd_wp;
  logic [MW-1:0] rd_m;
  logic          rd_v, rd_last;
  logic [MW:0]   m_cnt;
  state_t        s_nom, best_wp;
  logic [63:0]   best_d;
  logic [TW-1:0] t;
  logic          dyn_v_in, dyn_v_out;
  state_t        dyn_s;

  always_ff @(posedge clk) begin
    if (wp_we) wp_mem[wp_addr] <= wp_data;
    rd_wp <= wp_mem[rd_m];
  end

  // squared planar distance of the waypoint read last cycle
  logic [63:0] d_now;
  always_comb begin
    logic signed [63:0] dx, dy;
    dx    = 64'(rd_wp.x - s_nom.x);
    dy    = 64'(rd_wp.y - s_nom.y);
    d_now = 64'(dx * dx) + 64'(dy * dy);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      busy     <= 1'b0;
      done     <= 1'b0;
      rd_v     <= 1'b0;
      rd_last  <= 1'b0;
      dyn_v_in <= 1'b0;
      t        <= '0;
      m_cnt    <= '0;
      rd_m     <= '0;
      best_d   <= '1;
    end else begin
      done     <= 1'b0;
      dyn_v_in <= 1'b0;
      // scan pipeline: address issued in SCAN, data compared one cycle later
      if (rd_v) begin
        if (d_now < best_d) begin
          best_d  <= d_now;
          best_wp <= rd_wp;
        end
      end
      unique case (st)
        S_IDLE: if (start) begin
          s_nom  <= x0;
          t      <= '0;
          busy   <= 1'b1;
          m_cnt  <= '0;
          rd_m   <= '0;
          best_d <= '1;
          st     <= S_SCAN;
        end
        S_SCAN: begin
          rd_v    <= (m_cnt < (MW+1)'(M));
          rd_last <= (m_cnt == (MW+1)'(M - 1));
          if (m_cnt < (MW+1)'(M)) begin
            rd_m  <= rd_m + 1'b1;
            m_cnt <= m_cnt + 1'b1;
          end
          if (rd_last) st <= S_STEP;
        end
        S_STEP: begin
          // best_wp settled in the previous cycle's compare
          rd_v     <= 1'b0;
          rd_last  <= 1'b0;
          xref[t]  <= best_wp;
          if (t == TW'(N)) begin
            busy <= 1'b0;
            done <= 1'b1;
            st   <= S_IDLE;
          end else begin
            dyn_v_in <= 1'b1;
            st       <= S_WAIT;
          end
        end
        S_WAIT: if (dyn_v_out) begin
          s_nom  <= dyn_s;
          t      <= t + 1'b1;
          m_cnt  <= '0;
          rd_m   <= '0;
          best_d <= '1;
          st     <= S_SCAN;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // first scan address is issued the cycle SCAN is entered
  bicycle_step #(.TAG_W(1)) u_dyn (
    .clk, .rst_n, .dt(cfg.dt), .inv_wheelbase(cfg.inv_wheelbase),
    .in_valid(dyn_v_in), .s_in(s_nom), .u_in(u_nom[t[TW-1:0] == TW'(N) ? 0 : t]),
    .tag_in(1'b0), .out_valid(dyn_v_out), .s_out(dyn_s), .tag_out());
endmodule
