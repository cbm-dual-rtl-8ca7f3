// tb_controller: runs the step sequencer against a scheduler stand-in that
// stays busy for a random n clocks after each load. Checks the n + 4 clock
// step period, the step and run counters, done, alpha annealing against a
// fixed-point model (alpha *= C_T every an_steps steps, saturating), the RC
// output strobe on the last step of each point, the input stall and the
// consume pulse, and the mask register.
module tb_controller;
  import cbm_pkg::*;
  localparam int N = 128, STEPS = 8;
  logic clk = 0, rst_n = 0;
  param_wr_t pw;
  logic mask_we = 0;
  logic [7:0] mask_word = 0;
  logic [63:0] mask_wdata = 0;
  logic clear, rc_active, sched_load, sched_busy, upd_x, upd_s, consume, in_avail, rc_valid;
  logic busy, done, stall;
  logic [N-1:0] rc_mask;
  logic [4:0] log2_t0;
  logic [5:0] alpha_sa, alpha_rc;
  logic [2:0] phase;
  logic [31:0] step_cnt, anneal_cnt;
  int checks = 0, failures = 0;
  int busy_left = 0, n_cur = 0, last_load = -1, cyc = 0;
  int periods_bad = 0, periods = 0, rc_seen = 0, stalls = 0, consumes = 0;

  always #5 clk = ~clk;

  controller #(.N_CBM(N), .STEPS_PER_POINT(STEPS)) dut (.clk, .rst_n, .pw, .mask_we, .mask_word,
    .mask_wdata, .clear, .rc_mask, .rc_active, .log2_t0, .alpha_sa, .alpha_rc, .sched_load,
    .sched_busy, .upd_x, .upd_s, .phase, .consume, .in_avail, .rc_valid, .busy, .done, .stall,
    .step_cnt, .anneal_cnt);

  assign sched_busy = busy_left > 0;

  // scheduler stand-in and period monitor
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (busy_left > 0) busy_left <= busy_left - 1;
    if (sched_load) begin
      if (last_load >= 0) begin
        periods++;
        if (cyc - last_load != n_cur + 4 && !stall_between) periods_bad++;
      end
      n_cur = int'($urandom_range(0, 9));
      busy_left <= n_cur;
      last_load <= cyc;
      stall_between = 0;
    end
    if (stall) begin stall_between = 1; stalls++; end
    if (done) last_load <= -1;
    if (consume) consumes++;
    if (rc_valid) begin
      rc_seen++;
      checks++;
      if (!(upd_x && phase == 3'(STEPS - 1))) begin failures++; $display("FAIL rc_valid timing"); end
    end
  end
  bit stall_between = 0;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(param_e num, longint data);
    pw.we = 1; pw.num = num; pw.data = 64'(data);
    @(negedge clk);
    pw.we = 0;
  endtask

  task automatic run_and_wait(int maxc);
    wr(P_CTRL, 1);
    for (int c = 0; c < maxc && !done; c++) @(negedge clk);
  endtask

  initial begin
    int a_model;
    pw = '0; in_avail = 1;
    @(negedge clk); rst_n = 1;
    // SA only: anneal every 3 steps by C_T = 1.25 (160/128)
    wr(P_LOG2T0, 4); wr(P_CT, 160); wr(P_ANSTEPS, 3); wr(P_ALPHA0, 2); wr(P_NSTEPS, 30);
    wr(P_CTRL, 2);
    chk(alpha_sa == 2 && log2_t0 == 4, "parameters after clear");
    run_and_wait(2000);
    chk(done && !busy && step_cnt == 30, "30 steps then done");
    a_model = 2 << 10;
    for (int k = 0; k < 10; k++) begin
      a_model = (a_model * 160) >> 7;
      if (a_model > 65535) a_model = 65535;
    end
    chk(int'(alpha_sa) == (a_model >> 10) && anneal_cnt == 10, "alpha annealed");
    chk(alpha_rc == 2, "RC alpha stays alpha0");
    chk(periods_bad == 0 && periods > 20, "step period n+4");
    // saturation
    wr(P_CT, 255); wr(P_ANSTEPS, 1); wr(P_NSTEPS, 20);
    run_and_wait(2000);
    chk(alpha_sa == 63, "alpha saturates");
    // mask: RC neurons present -> input stalls and RC outputs
    mask_we = 1; mask_word = 1; mask_wdata = 64'hF0; @(negedge clk); mask_we = 0;
    chk(rc_active && rc_mask == {56'd0, 8'hF0, 64'd0}, "mask write");
    wr(P_CTRL, 2); wr(P_NSTEPS, 3 * STEPS);
    in_avail = 0;
    wr(P_CTRL, 1);
    repeat (20) @(negedge clk);
    chk(stall && busy, "waits for input");
    for (int c = 0; c < 3000 && !done; c++) begin
      in_avail = consume ? 1'b0 : ($urandom_range(0, 30) == 0 ? 1'b1 : in_avail);
      @(negedge clk);
    end
    chk(done && step_cnt == 3 * STEPS, "RC run done");
    chk(rc_seen == 3, "one RC output per point");
    chk(consumes == 3 && stalls > 0, "three points consumed, stalls seen");
    chk(periods_bad == 0, "step period n+4 with RC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
