// tb_cbm_dual_top: end-to-end test of the CBM-Dual core at full size
// (1024 CBM neurons, 16 inputs, 10 outputs, 256 steps per input point).
//
// A software model of the chaotic Boltzmann machine runs beside the core and
// recomputes every Z from scratch (full matrix-vector product, no deltas),
// so it checks the delta-driven scheduling as well as the arithmetic.
//   Phase 1, SA only: random 2-bit weights, random initial states, two
//     annealing runs back to back (the second resumes the first); states are
//     compared after every step and the SA solution is read over the host
//     port after each run.
//   Phase 2, simultaneous SA + RC: neurons 0..499 SA, 500..1023 RC, no
//     weights between the two groups; input points arrive late on purpose
//     (input stalls); every RC output O is compared with the model.
// Every step's length is checked against n + 4 clocks, n being the number
// of flipped neurons and input pulses. Each mechanism (skipped MACs,
// deterministic flips, annealing, input stall, RC output, SA read-out,
// resume, SA/RC mode switch) is counted and must occur.
module tb_cbm_dual_top;
  import cbm_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 1024, NIN = 16, NOUT = 10, STEPS = 256;
  localparam int N_SA2 = 500;

  logic clk = 0, rst_n = 0, h_we = 0, h_re = 0, in_valid = 0;
  logic [23:0] h_addr = 0;
  logic [63:0] h_wdata = 0, h_rdata;
  logic h_rvalid, in_ready, rc_valid, busy, done;
  logic [NIN*8-1:0] in_data = '0;
  logic [NOUT*O_BITS-1:0] rc_data;

  always #5 clk = ~clk;

  cbm_dual_top dut (.clk, .rst_n, .h_we, .h_re, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
    .in_valid, .in_ready, .in_data, .rc_valid, .rc_data, .busy, .done);

  // ---------------- model state ----------------
  byte wc [N][N];          // wc[r][j]: weight from neuron r to neuron j
  byte wi [NIN][N];
  shortint wo [N][NOUT];
  bit  mask [N];
  bit  ms [N], last_s [N];
  int  mx [N];
  bit  last_i [NIN];
  int  a_reg, log2t0, ct, an_steps, alpha0, an_cnt, phase_m, t_model;
  logic [NIN*8-1:0] points [$];
  int  point_idx;
  bit  rc_on;

  int checks = 0, failures = 0;
  int cnt_skip = 0, cnt_det = 0, cnt_stall = 0, cnt_rc = 0, cnt_sa_read = 0, cnt_resume = 0;
  int cnt_mixed_steps = 0, cnt_period_ok = 0, total_events = 0, total_steps = 0;
  int cyc = 0, load_cyc = 0, exp_n = 0;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s (step %0d)", what, t_model);
    end
  endtask

  // ---------------- host port ----------------
  task automatic hw(int region, int row, int word, logic [63:0] d);
    h_we = 1; h_addr = {4'(region), 12'(row), 8'(word)}; h_wdata = d;
    @(negedge clk);
    h_we = 0;
  endtask

  task automatic hr(int region, int word, output logic [63:0] d);
    h_re = 1; h_addr = {4'(region), 12'd0, 8'(word)};
    @(negedge clk);
    h_re = 0;
    d = h_rdata;
  endtask

  task automatic write_all_weights();
    for (int r = 0; r < N; r++)
      for (int w = 0; w < N * 2 / 64; w++) begin
        logic [63:0] d;
        for (int b = 0; b < 32; b++) d[b*2 +: 2] = 2'(wc[r][w*32 + b]);
        hw(REG_WCBM, r, w, d);
      end
    for (int r = 0; r < NIN; r++)
      for (int w = 0; w < N * 8 / 64; w++) begin
        logic [63:0] d;
        for (int b = 0; b < 8; b++) d[b*8 +: 8] = 8'(wi[r][w*8 + b]);
        hw(REG_WIN, r, w, d);
      end
    for (int r = 0; r < N; r++)
      for (int w = 0; w < 3; w++) begin
        logic [63:0] d;
        d = '0;
        for (int b = 0; b < 4; b++) if (w*4 + b < NOUT) d[b*16 +: 16] = 16'(wo[r][w*4 + b]);
        hw(REG_WOUT, r, w, d);
      end
  endtask

  task automatic write_mask_and_clear();
    for (int w = 0; w < N / 64; w++) begin
      logic [63:0] d;
      for (int b = 0; b < 64; b++) d[b] = mask[w*64 + b];
      hw(REG_MASK, 0, w, d);
    end
    hw(REG_PARAM, 0, P_CTRL, 64'd2);    // clear
    rc_on = 0;
    foreach (mask[j]) rc_on |= mask[j];
    foreach (ms[j]) begin ms[j] = 0; mx[j] = 0; last_s[j] = 0; end
    foreach (last_i[k]) last_i[k] = 0;
    a_reg = alpha0 << 10; an_cnt = 0; phase_m = 0;
  endtask

  task automatic write_init_states();
    for (int w = 0; w < N / 64; w++) begin
      logic [63:0] d;
      d = {$urandom, $urandom};
      for (int b = 0; b < 64; b++) ms[w*64 + b] = d[b];
      hw(REG_SINIT, 0, w, d);
    end
  endtask

  task automatic set_params(int l, int c, int an, int a0);
    log2t0 = l; ct = c; an_steps = an; alpha0 = a0;
    hw(REG_PARAM, 0, P_LOG2T0, 64'(l));
    hw(REG_PARAM, 0, P_CT, 64'(c));
    hw(REG_PARAM, 0, P_ANSTEPS, 64'(an));
    hw(REG_PARAM, 0, P_ALPHA0, 64'(a0));
  endtask

  // pulses of the step being loaded (model)
  function automatic bit pulse_m(int k);
    if (!rc_on) return 0;
    return phase_m < int'(points[point_idx][k*8 +: 8]);
  endfunction

  // model output layer: O_k = sum over RC neurons of W^OUT S (states before this step's update)
  function automatic longint o_model(int k);
    longint o;
    o = 0;
    for (int r = 0; r < N; r++) if (mask[r] && ms[r]) o += wo[r][k];
    return o;
  endfunction

  // one model step: Z from scratch, X/S update, annealing
  task automatic model_step();
    int z [N];
    int alpha_sa_m;
    bit in_now [NIN];
    alpha_sa_m = a_reg >> 10;
    foreach (z[j]) z[j] = 0;
    for (int k = 0; k < NIN; k++) begin
      in_now[k] = pulse_m(k);
      if (in_now[k]) for (int j = 0; j < N; j++) if (mask[j]) z[j] += wi[k][j];
    end
    for (int r = 0; r < N; r++) if (ms[r]) for (int j = 0; j < N; j++) z[j] += wc[r][j];
    for (int j = 0; j < N; j++) begin
      if (ref_det(z[j], ms[j], log2t0)) cnt_det++;
      mx[j] += ref_dx(z[j], ms[j], log2t0, mask[j] ? alpha0 : alpha_sa_m);
      if (mx[j] >= 256) begin ms[j] = !ms[j]; mx[j] = 0; end
    end
    foreach (in_now[k]) last_i[k] = in_now[k];
    an_cnt++;
    if (an_cnt >= an_steps) begin
      an_cnt = 0;
      a_reg = (a_reg * ct) >> 7;
      if (a_reg > 65535) a_reg = 65535;
    end
    if (rc_on && phase_m == STEPS - 1) point_idx++;
    phase_m = (phase_m + 1) % STEPS;
    t_model++;
  endtask

  // events the scheduler must issue when the next step is loaded
  function automatic int events_m();
    int n;
    n = 0;
    for (int j = 0; j < N; j++) if (ms[j] != last_s[j]) n++;
    for (int k = 0; k < NIN; k++) if (pulse_m(k) != last_i[k]) n++;
    return n;
  endfunction

  // ---------------- step monitor ----------------
  bit s_check_pending = 0;
  initial begin
    forever begin
      @(negedge clk);
      cyc++;
      if (s_check_pending) begin
        bit ok;
        ok = 1;
        for (int j = 0; j < N; j++) ok &= (dut.s_vec[j] == ms[j]);
        chk(ok, "all states S match model");
        chk(dut.alpha_sa == 6'(a_reg >> 10), "annealed alpha");
        s_check_pending = 0;
      end
      if (dut.stall) cnt_stall++;
      if (dut.sched_load) begin
        load_cyc = cyc;
        exp_n = events_m();
        foreach (ms[j]) last_s[j] = ms[j];
        total_events += exp_n;
        if (exp_n < N + (rc_on ? NIN : 0)) cnt_skip++;
      end
      if (rc_valid) begin
        bit ok;
        ok = 1;
        for (int k = 0; k < NOUT; k++) ok &= (longint'($signed(rc_data[k*O_BITS +: O_BITS])) == o_model(k));
        chk(ok, "RC output O");
        cnt_rc++;
      end
      if (dut.upd_s) begin
        chk(cyc - load_cyc + 1 == exp_n + 4, "step takes n+4 clocks");
        if (cyc - load_cyc + 1 == exp_n + 4) cnt_period_ok++;
        model_step();
        total_steps++;
        if (rc_on) cnt_mixed_steps++;
        s_check_pending = 1;
      end
    end
  end

  // ---------------- input feeder (deliberately slow) ----------------
  // A point is offered 2500 clocks after the buffer empties, so the first
  // point of a run arrives late and the core has to stall for it.
  initial begin
    forever begin
      @(negedge clk);
      if (rc_on && in_ready) begin
        repeat (2500) @(negedge clk);
        in_data = {$urandom, $urandom, $urandom, $urandom};
        in_valid = 1;
        points.push_back(in_data);
        while (!in_ready) @(negedge clk);
        @(negedge clk);          // accepted at the edge before this one
        in_valid = 0;
      end
    end
  end

  task automatic run(int nsteps);
    hw(REG_PARAM, 0, P_NSTEPS, 64'(nsteps));
    hw(REG_PARAM, 0, P_CTRL, 64'd1);
    while (!done) @(negedge clk);
  endtask

  task automatic check_sa_solution();
    for (int w = 0; w < N / 64; w++) begin
      logic [63:0] d, e;
      hr(REG_SOUT, w, d);
      for (int b = 0; b < 64; b++) e[b] = ms[w*64 + b] && !mask[w*64 + b];
      chk(d == e, "SA solution read-out");
    end
    cnt_sa_read++;
  endtask

  initial begin
    t_model = 0; point_idx = 0; rc_on = 0;
    // weights: SA block 0..N_SA2-1 and RC block N_SA2..N-1, none across
    for (int r = 0; r < N; r++) for (int j = 0; j < N; j++)
      wc[r][j] = ((r < N_SA2) == (j < N_SA2) && r != j) ? byte'(int'($urandom_range(0, 2)) - 1) : 8'sd0;
    for (int k = 0; k < NIN; k++) for (int j = 0; j < N; j++) wi[k][j] = byte'($urandom);
    for (int r = 0; r < N; r++) for (int k = 0; k < NOUT; k++) wo[r][k] = shortint'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    write_all_weights();

    // ---- phase 1: SA only, two annealing runs ----
    foreach (mask[j]) mask[j] = 0;
    set_params(3, 144, 4, 1);
    write_mask_and_clear();
    write_init_states();
    run(24);
    check_sa_solution();
    run(24);
    cnt_resume++;
    check_sa_solution();

    // ---- phase 2: simultaneous SA (0..499) and RC (500..1023) ----
    foreach (mask[j]) mask[j] = (j >= N_SA2);
    set_params(3, 136, 8, 2);
    write_mask_and_clear();
    write_init_states();
    point_idx = 0; points.delete();
    run(2 * STEPS + 8);
    check_sa_solution();

    $display("steps=%0d events=%0d (%.2f per step of %0d) det_flips=%0d stall_cycles=%0d rc_outputs=%0d",
             total_steps, total_events, real'(total_events) / total_steps, N + NIN, cnt_det, cnt_stall, cnt_rc);
    chk(cnt_skip > 0, "MACs skipped (DDMAC)");
    chk(cnt_det > 0, "deterministic flips");
    chk(int'(dut.u_ctrl.anneal_cnt) > 0 && a_reg != (2 << 10), "annealing");
    chk(cnt_stall > 0, "input stall");
    chk(cnt_rc == 2, "two RC outputs");
    chk(cnt_sa_read == 3, "SA read-outs");
    chk(cnt_resume == 1, "resumed run");
    chk(cnt_mixed_steps > 0 && total_steps > cnt_mixed_steps, "SA-only and SA+RC mode");
    chk(cnt_period_ok == total_steps, "every step n+4 clocks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
