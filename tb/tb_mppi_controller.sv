// tb_mppi_controller: MAX_ITERS=2, N=4, with the stages replaced by simple
// responders (noise fill 40 cycles, desired states 10, rollout + update 30
// with control writes). Runs two control steps and checks: the noise
// generator alternates buffers and runs ahead; desired states start only on
// a full buffer; the read buffer alternates per iteration; two iterations per
// step; u_act is the updated u_nom[0]; the sequence is shifted afterwards
// with the last control repeated; x0 is latched at start.
module tb_mppi_controller;
  import mppi_pkg::*;
  import tb_mppi_ref_pkg::*;
  localparam int N = 4, IT = 2;
  logic clk = 0, rst_n = 0, start = 0;
  state_t x0_in, x0;
  logic busy, u_act_valid;
  ctrl_t u_nom [N];
  ctrl_t u_act;
  logic [15:0] iter;
  logic ng_start, ng_wbuf, ng_done = 0, ds_start, ds_done = 0, ro_start, cu_start, rbuf, cu_done = 0;
  logic u_we = 0;
  logic [1:0] u_wt = 0;
  ctrl_t u_wdata;
  logic full_m [2];
  ctrl_t model [N];
  int checks = 0, failures = 0, n_ng = 0, n_iter = 0, n_act = 0, last_rbuf = -1;
  always #5 clk = ~clk;

  mppi_controller #(.N(N), .MAX_ITERS(IT)) dut (.clk, .rst_n, .start, .x0_in, .busy, .x0, .u_nom,
    .u_act_valid, .u_act, .iter, .ng_start, .ng_wbuf, .ng_done, .ds_start, .ds_done,
    .ro_start, .cu_start, .rbuf, .cu_done, .u_we, .u_wt, .u_wdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // noise generator responder
  always @(posedge clk) if (rst_n && ng_start) begin
    logic b;
    b = ng_wbuf;
    checks++;
    if (full_m[b] || b != 1'(n_ng % 2)) failures++;
    n_ng++;
    fork begin
      repeat (40) @(negedge clk);
      ng_done = 1; full_m[b] = 1;
      @(negedge clk);
      ng_done = 0;
    end join_none
  end

  // desired-state responder
  always @(posedge clk) if (rst_n && ds_start) begin
    checks++;
    if (!full_m[rbuf]) failures++;
    fork begin
      repeat (10) @(negedge clk);
      ds_done = 1;
      @(negedge clk);
      ds_done = 0;
    end join_none
  end

  // rollout + control-update responder: adds (iteration+1) to every control
  always @(posedge clk) if (rst_n && cu_start) begin
    logic b;
    b = rbuf;
    checks += 2;
    if (!ro_start) failures++;
    if (last_rbuf >= 0 && int'(b) == last_rbuf) failures++;
    last_rbuf = int'(b);
    fork begin
      repeat (20) @(negedge clk);
      for (int t = 0; t < N; t++) begin
        u_we = 1; u_wt = 2'(t);
        u_wdata.steer = u_nom[t].steer + fx_of(0.25);
        u_wdata.accel = u_nom[t].accel + fx_t'(t + 1);
        model[t] = u_wdata;
        @(negedge clk);
      end
      u_we = 0;
      full_m[b] = 0;
      cu_done = 1;
      n_iter++;
      @(negedge clk);
      cu_done = 0;
    end join_none
  end

  task automatic step(input int n);
    @(negedge clk);
    x0_in.x = fx_t'(n * 11); x0_in.y = fx_t'(n * 7); x0_in.th = '0; x0_in.v = fx_t'(n);
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (x0 !== x0_in || !busy) failures++;
    while (!u_act_valid) @(negedge clk);
    n_act++;
    checks++;
    if (u_act !== model[0]) failures++;
    @(negedge clk);
    for (int t = 0; t < N; t++) begin
      checks++;
      if (u_nom[t] !== model[(t < N - 1) ? t + 1 : N - 1]) failures++;
    end
    checks++;
    if (iter != 16'(IT) || busy) failures++;
  endtask

  initial begin
    full_m[0] = 0; full_m[1] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    step(1);
    step(2);
    checks++;
    if (n_iter != 2 * IT) failures++;
    checks++;
    if (n_ng < 2 * IT) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
