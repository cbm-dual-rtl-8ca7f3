// tb_maxcut_k1000: the fully connected max-cut workload K1000 in SA mode.
//
// 1000 spins with random symmetric +-1 couplings (p- = p+ = 0.5) are mapped
// onto neurons 0..999 (neurons 1000..1023 left unconnected), started from a
// random state and annealed for 600 steps (T0 = 8, alpha from 1, x1.0625
// every 20 steps). The testbench tracks the energy E = -sum_{i<j} W_ij S_i S_j
// of the states after every step, the number of flipped neurons per step and
// the clocks per step. It checks that the energy of the final SA solution
// read over the host port is well below that of the start, that the best
// energy is reached in the run, that the average flip rate stays in the few
// percent the chaotic dynamics predicts, and that the average step length
// equals flips + 4 clocks.
module tb_maxcut_k1000;
  import cbm_pkg::*;
  localparam int N = 1024, NP = 1000, NSTEPS = 600;

  logic clk = 0, rst_n = 0, h_we = 0, h_re = 0;
  logic [23:0] h_addr = 0;
  logic [63:0] h_wdata = 0, h_rdata;
  logic h_rvalid, in_ready, rc_valid, busy, done;
  logic [N-1:0] s_final, s_prev;
  logic [10*O_BITS-1:0] rc_data;
  byte w [NP][NP];
  int checks = 0, failures = 0;
  int e0, e_best, e_final, flips_total = 0, steps_seen = 0, cyc = 0, load_cyc = 0, clocks_total = 0;

  always #5 clk = ~clk;

  cbm_dual_top dut (.clk, .rst_n, .h_we, .h_re, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
    .in_valid(1'b0), .in_ready, .in_data('0), .rc_valid, .rc_data, .busy, .done);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic hw(int region, int row, int word, logic [63:0] d);
    h_we = 1; h_addr = {4'(region), 12'(row), 8'(word)}; h_wdata = d;
    @(negedge clk);
    h_we = 0;
  endtask

  function automatic int energy(logic [N-1:0] s);
    int e;
    e = 0;
    for (int i = 0; i < NP; i++) if (s[i]) for (int j = i + 1; j < NP; j++) if (s[j]) e -= w[i][j];
    return e;
  endfunction

  // energy and flips after every step
  bit pending = 0;
  initial begin
    forever begin
      @(negedge clk);
      cyc++;
      if (pending) begin
        int e;
        last_flips = $countones(dut.s_vec ^ s_prev);
        flips_total += last_flips;
        s_prev = dut.s_vec;
        steps_seen++;
        e = energy(dut.s_vec);
        if (e < e_best) e_best = e;
        pending = 0;
      end
      if (dut.sched_load) load_cyc = cyc;
      if (dut.upd_s) begin
        clocks_total += cyc - load_cyc + 1;
        pending = 1;
      end
    end
  end

  initial begin
    for (int i = 0; i < NP; i++) begin
      w[i][i] = 0;
      for (int j = i + 1; j < NP; j++) begin
        w[i][j] = $urandom_range(0, 1) ? 8'sd1 : -8'sd1;
        w[j][i] = w[i][j];
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < N; r++)
      for (int wd = 0; wd < N * 2 / 64; wd++) begin
        logic [63:0] d;
        for (int b = 0; b < 32; b++) begin
          int j;
          j = wd * 32 + b;
          d[b*2 +: 2] = (r < NP && j < NP) ? 2'(w[r][j]) : 2'd0;
        end
        hw(REG_WCBM, r, wd, d);
      end
    hw(REG_PARAM, 0, P_LOG2T0, 64'd3);
    hw(REG_PARAM, 0, P_CT, 64'd136);
    hw(REG_PARAM, 0, P_ANSTEPS, 64'd20);
    hw(REG_PARAM, 0, P_ALPHA0, 64'd1);
    hw(REG_PARAM, 0, P_CTRL, 64'd2);
    for (int wd = 0; wd < N / 64; wd++) begin
      logic [63:0] d;
      d = {$urandom, $urandom};
      s_prev[wd*64 +: 64] = d;
      hw(REG_SINIT, 0, wd, d);
    end
    e0 = energy(s_prev);
    init_ones = $countones(s_prev);
    e_best = e0;
    hw(REG_PARAM, 0, P_NSTEPS, 64'(NSTEPS));
    hw(REG_PARAM, 0, P_CTRL, 64'd1);
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int wd = 0; wd < N / 64; wd++) begin
      h_re = 1; h_addr = {4'(REG_SOUT), 12'd0, 8'(wd)};
      @(negedge clk);
      h_re = 0;
      s_final[wd*64 +: 64] = h_rdata;
    end
    e_final = energy(s_final);
    $display("K1000: E start=%0d final=%0d best=%0d, flips/step=%.2f (%.2f%%), clocks/step=%.2f",
             e0, e_final, e_best, real'(flips_total) / steps_seen,
             100.0 * real'(flips_total) / steps_seen / NP, real'(clocks_total) / steps_seen);
    chk(steps_seen == NSTEPS, "all steps ran");
    chk(e_final < e0 - 1000, "energy lowered by annealing");
    chk(e_best <= e_final, "best energy tracked");
    chk(real'(flips_total) / steps_seen < 0.05 * NP, "flip rate below 5%");
    // the first step schedules every neuron that is 1 after the clear
    // step t schedules the flips of step t-1; the first step after the clear
    // schedules every neuron that starts at 1; the last step's flips are
    // left for a later run
    chk(clocks_total == init_ones + flips_total - last_flips + 4 * steps_seen, "step length = flips + 4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int init_ones = 0, last_flips = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
