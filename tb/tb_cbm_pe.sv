// tb_cbm_pe: one CBM neuron. Sends random weighted events (CBM and input,
// with the neuron RC- or SA-assigned), checks that Z equals the running sum
// computed here, then runs X/S updates and checks X and S against the ATMS
// reference (X += dX, flip and restart at X >= 256).
module tb_cbm_pe;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, s_we = 0, s_wdata = 0, is_rc = 0;
  logic acc_en = 0, acc_add = 0, acc_is_in = 0, upd_x = 0, upd_s = 0, flip_det;
  logic signed [7:0] w_in = 0;
  logic signed [1:0] w_cbm = 0;
  logic [4:0] log2_t0 = 3;
  logic [5:0] alpha = 2;
  logic s;
  logic signed [18:0] z;
  logic [9:0] x;
  int checks = 0, failures = 0;
  int mz = 0, mx = 0, flips = 0;
  bit ms = 0;

  always #5 clk = ~clk;

  cbm_pe dut (.clk, .rst_n, .clear, .s_we, .s_wdata, .is_rc, .acc_en, .acc_add, .acc_is_in,
              .w_in, .w_cbm, .upd_x, .upd_s, .log2_t0, .alpha, .s, .z, .x, .flip_det);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s z=%0d/%0d x=%0d/%0d s=%0d/%0d", what, z, mz, x, mx, s, ms); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int stp = 0; stp < 300; stp++) begin
      int nev;
      @(negedge clk);
      is_rc = stp[5];
      alpha = 6'($urandom_range(1, 8));
      log2_t0 = 5'($urandom_range(0, 4));
      nev = int'($urandom_range(0, 6));
      for (int e = 0; e < nev; e++) begin
        bit inp, ad; int wi, wc;
        inp = 1'($urandom); ad = 1'($urandom);
        wi = int'($urandom_range(0, 40)) - 20; wc = int'($urandom_range(0, 3)) - 2;
        begin
          int d;
          d = inp ? wi : wc;
          if (mz + (ad ? d : -d) > 48 || mz + (ad ? d : -d) < -48) ad = !ad;
        end
        acc_en = 1; acc_add = ad; acc_is_in = inp; w_in = 8'(wi); w_cbm = 2'(wc);
        if (!inp) mz += ad ? wc : -wc;
        else if (is_rc) mz += ad ? wi : -wi;
        @(negedge clk);
      end
      acc_en = 0;
      @(negedge clk);
      chk(int'(z) == mz, "Z sum");
      upd_x = 1; @(negedge clk); upd_x = 0;
      mx += ref_dx(mz, ms, int'(log2_t0), int'(alpha));
      chk(int'(x) == mx, "X update");
      upd_s = 1; @(negedge clk); upd_s = 0;
      if (mx >= 256) begin ms = !ms; mx = 0; flips++; end
      chk(s == ms && int'(x) == mx, "S update");
    end
    chk(flips > 10, "flips happened");
    // initial state load and clear
    s_we = 1; s_wdata = !ms; @(negedge clk); s_we = 0;
    chk(s == !ms, "S load");
    clear = 1; @(negedge clk); clear = 0;
    chk(z == 0 && x == 0 && s == 0, "clear");
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
