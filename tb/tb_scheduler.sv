// tb_scheduler: loads random CBM state and pulse vectors (with few flips, as
// in a CBM, and sometimes many) and checks that the scheduler emits exactly
// the flipped neurons, lowest index first, one per clock, with the right
// ADD/SUB control, and that stream i' carries only flipped RC neurons.
// Also checks the cycle count: n flips take n clocks.
module tb_scheduler;
  localparam int N = 64, NIN = 4, NI = N + NIN;
  logic clk = 0, rst_n = 0, clear = 0, load = 0;
  logic [N-1:0] s_vec = '0, rc_mask = '0;
  logic [NIN-1:0] pulse_vec = '0;
  logic valid, add, is_in, ovalid, oadd, busy;
  logic [6:0] idx;
  logic [5:0] oidx;
  int checks = 0, failures = 0;
  logic [NI-1:0] prev = '0, cur;

  always #5 clk = ~clk;

  scheduler #(.N_CBM(N), .N_IN(NIN)) dut (.clk, .rst_n, .clear, .load, .s_vec, .pulse_vec, .rc_mask,
    .valid, .idx, .add, .is_in, .ovalid, .oidx, .oadd, .busy);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [NI-1:0] d;
      int ei, eo, cyc;
      int exp_i[$], exp_o[$];
      exp_i.delete(); exp_o.delete();
      cur = prev;
      if (t % 20 == 0) cur = {$urandom, $urandom, $urandom};
      else for (int k = 0; k < int'($urandom_range(0, 4)); k++) cur[$urandom_range(0, NI-1)] ^= 1'b1;
      rc_mask = {$urandom, $urandom};
      s_vec = cur[N-1:0]; pulse_vec = cur[NI-1:N];
      d = cur ^ prev;
      for (int k = 0; k < NI; k++) if (d[k]) exp_i.push_back(k);
      for (int k = 0; k < N; k++) if (d[k] && rc_mask[k]) exp_o.push_back(k);
      load = 1; @(negedge clk); load = 0;
      ei = 0; eo = 0; cyc = 0;
      while (busy && cyc < 200) begin
        if (valid) begin
          chk(ei < exp_i.size() && int'(idx) == exp_i[ei], "i order");
          chk(add == cur[idx] && is_in == (idx >= N), "i add/is_in");
          ei++;
        end
        if (ovalid) begin
          chk(eo < exp_o.size() && int'(oidx) == exp_o[eo], "i' order");
          chk(oadd == cur[oidx], "i' add");
          eo++;
        end
        cyc++;
        @(negedge clk);
      end
      chk(ei == exp_i.size() && eo == exp_o.size(), "all events emitted");
      chk(cyc == exp_i.size(), "one event per clock");
      prev = cur;
    end
    clear = 1; @(negedge clk); clear = 0;
    chk(!busy, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
