// tb_cbm_processing_unit: 32 neurons, half SA and half RC. Streams random
// W^CBM and W^IN rows with ADD/SUB, then X and S updates, and checks every
// neuron's Z, X and S against a software model (inputs only reach RC
// neurons; SA neurons use alpha_sa, RC neurons alpha_rc).
module tb_cbm_processing_unit;
  import tb_ref_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, clear = 0, acc_en = 0, acc_add = 0, acc_is_in = 0, upd_x = 0, upd_s = 0;
  logic [N-1:0] s_we = '0, s_wdata = '0, rc_mask, s_vec, flip_det_vec;
  logic [N*8-1:0] w_in_row = '0;
  logic [N*2-1:0] w_cbm_row = '0;
  logic [4:0] log2_t0 = 2;
  logic [5:0] alpha_sa = 5, alpha_rc = 1;
  int mz [N], mx [N];
  bit ms [N];
  int checks = 0, failures = 0, flips = 0;

  logic signed [18:0] zmon [N];
  logic [9:0] xmon [N];

  always #5 clk = ~clk;

  for (genvar g = 0; g < N; g++) begin : g_mon
    assign zmon[g] = dut.g_pe[g].z_n;
    assign xmon[g] = dut.g_pe[g].x_n;
  end

  cbm_processing_unit #(.N_CBM(N)) dut (.clk, .rst_n, .clear, .s_we, .s_wdata, .rc_mask, .acc_en,
    .acc_add, .acc_is_in, .w_in_row, .w_cbm_row, .upd_x, .upd_s, .log2_t0, .alpha_sa, .alpha_rc,
    .s_vec, .flip_det_vec);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    rc_mask = 32'hFFFF0000;
    foreach (mz[n]) begin mz[n] = 0; mx[n] = 0; ms[n] = 0; end
    @(negedge clk); rst_n = 1;
    s_we = '1; s_wdata = 32'h0F0F0F0F; @(negedge clk); s_we = '0;
    foreach (ms[n]) ms[n] = s_wdata[n];
    for (int stp = 0; stp < 150; stp++) begin
      int nev;
      nev = int'($urandom_range(0, 5));
      alpha_sa = 6'($urandom_range(1, 10));
      for (int e = 0; e < nev; e++) begin
        acc_en = 1; acc_add = 1'($urandom); acc_is_in = ($urandom_range(0, 3) == 0);
        w_in_row = {8{$urandom}}; w_cbm_row = {2{$urandom}};
        for (int n = 0; n < N; n++) begin
          int w;
          w = acc_is_in ? int'($signed(w_in_row[n*8 +: 8])) : int'($signed(w_cbm_row[n*2 +: 2]));
          if (!acc_is_in || rc_mask[n]) mz[n] += acc_add ? w : -w;
        end
        @(negedge clk);
      end
      acc_en = 0;
      upd_x = 1; @(negedge clk); upd_x = 0;
      for (int n = 0; n < N; n++) begin
        chk(int'(zmon[n]) == mz[n], "Z");
        mx[n] += ref_dx(mz[n], ms[n], int'(log2_t0), int'(rc_mask[n] ? alpha_rc : alpha_sa));
      end
      upd_s = 1; @(negedge clk); upd_s = 0;
      for (int n = 0; n < N; n++) begin
        if (mx[n] >= 256) begin ms[n] = !ms[n]; mx[n] = 0; flips++; end
        chk(s_vec[n] == ms[n], "S");
        chk(int'(xmon[n]) == mx[n], "X");
      end
    end
    chk(flips > 50, "neurons flipped");
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
